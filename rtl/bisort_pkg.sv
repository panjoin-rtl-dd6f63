// Shared types and constants of the BI-Sort worker node.
//
// A tuple is one 64-bit memory word {key, value}; the join field is the
// 32-bit value in the low half, compared as an unsigned number. The paper
// gives the <key, value> format with two 32-bit integers; which half is the
// low one and the unsigned comparison are this design's choices.
// Word addresses are ADDR_W bits wide: two channels of 4 GB of 64-bit words
// (the board the paper uses) need 2^30 word addresses.
package bisort_pkg;

  localparam int WORD_W = 64;   // one tuple or one record per memory word
  localparam int VAL_W  = 32;   // join field
  localparam int ADDR_W = 30;   // word address into external memory
  localparam int IDX_W  = 32;   // tuple counts and array indices

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [VAL_W-1:0]  val_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [IDX_W-1:0]  idx_t;

  // Processing commands a worker node receives from the manager node.
  typedef enum logic [1:0] {
    OP_CREATE = 2'd0,  // start a new, empty subwindow
    OP_INSERT = 2'd1,  // merge a sorted batch into the main array
    OP_PROBE  = 2'd2,  // probe the main array with a sorted batch
    OP_EXPIRE = 2'd3   // drop the whole subwindow
  } op_e;

  typedef struct packed {
    op_e   op;
    addr_t batch_addr;  // first word of the sorted batch in memory
    idx_t  batch_len;   // number of tuples in the batch
    val_t  eps;         // band half-width; 0 gives an equi-join
    addr_t res_addr;    // probe results: lower ids here, upper ids after batch_len words
    addr_t scratch_addr;// probe scratch: bounds, then lower targets, then upper targets
  } cmd_t;

  function automatic val_t val_of(word_t w);
    return w[VAL_W-1:0];
  endfunction

endpackage
