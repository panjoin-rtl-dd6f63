// Indexer of the insertion engine: rebuilds the index array after a merge.
//
// The paper: "the index array samples the value of every M/P tuple in the
// main array", built once all mergers have finished. Entry p takes the
// tuple at position pos_p = floor(p*M/P). Since P is a power of two the
// position is a running sum of M shifted right by log2(P), so no multiplier
// is needed. One read request is issued per cycle (the read port may stall
// it); the answers come back in order and each is written to the index RAM
// as it arrives, with a second running sum giving its position. `done`
// pulses after the P-th entry is written. With M = 0 nothing is read and
// the index keeps its old contents (an empty subwindow is never searched).
// The value written (wval) is the read answer passed straight through.
module indexer
  import bisort_pkg::*;
#(
  parameter int LOG2P = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  addr_t            main_base,
  input  idx_t             main_len,
  output logic             busy,
  output logic             done,
  // read port
  output logic             req_valid,
  input  logic             req_ready,
  output addr_t            req_addr,
  input  logic             rsp_valid,
  input  word_t            rsp_data,
  // index RAM write port
  output logic             we,
  output logic [LOG2P-1:0] waddr,
  output idx_t             wpos,
  output val_t             wval
);
  localparam int P = 1 << LOG2P;
  logic [IDX_W+LOG2P-1:0] req_acc, rsp_acc;
  logic [LOG2P:0]         n_req, n_rsp;
  addr_t                  base;
  idx_t                   m;

  assign req_valid = busy && n_req != (LOG2P+1)'(P);
  assign req_addr  = base + addr_t'(req_acc >> LOG2P);
  assign we        = busy && rsp_valid;
  assign waddr     = n_rsp[LOG2P-1:0];
  assign wpos      = idx_t'(rsp_acc >> LOG2P);
  assign wval      = val_of(rsp_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; req_acc <= '0; rsp_acc <= '0;
      n_req <= '0; n_rsp <= '0; base <= '0; m <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        base <= main_base; m <= main_len;
        req_acc <= '0; rsp_acc <= '0; n_req <= '0; n_rsp <= '0;
        busy <= main_len != '0;
        done <= main_len == '0;
      end else if (busy) begin
        if (req_valid && req_ready) begin
          n_req   <= n_req + 1'b1;
          req_acc <= req_acc + (IDX_W+LOG2P)'(m);
        end
        if (rsp_valid) begin
          n_rsp   <= n_rsp + 1'b1;
          rsp_acc <= rsp_acc + (IDX_W+LOG2P)'(m);
          if (n_rsp == (LOG2P+1)'(P - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
