// Probing engine of the BI-Sort worker node (right half of Fig. 7).
//
// Answers a sorted batch of probe tuples with one <id_start, id_end> record
// per tuple: the matching tuples are main-array positions [id_start, id_end).
// Three phases, one after the other, all through external memory:
//   1. the boundary generator writes {upper, lower} for every probe tuple
//      to the bound array (scratch + j);
//   2. two partitioners, one for the lower and one for the upper bounds,
//      run side by side and write each bound's target-partition start to
//      the lower target array (scratch + len + j) and the upper target
//      array (scratch + 2*len + j);
//   3. NPR probers run side by side: the first half handle lower bounds and
//      the second half upper bounds, each taking one of NPR/2 equal,
//      contiguous slices of the batch. Lower results go to res + j, upper
//      results to res + len + j.
// The paper names these units and their order (bounds, then partitions,
// then probing) and draws two partitioners; the memory arrays between the
// phases, the lower/upper split of the partitioners and probers and the
// slicing of the batch are this design's choices.
// Partitioners and probers write positions, so the upper 32 bits of their
// words are zero.
//
// Memory ports as flat arrays: read 0 boundary generator, 1..2 partitioners
// (lower, upper), then 3 per prober k: 3+3k main array, 4+3k bounds,
// 5+3k targets. Write 0 boundary generator, 1..2 partitioners, 3+k prober k.
module probing_engine
  import bisort_pkg::*;
#(
  parameter int NPR       = 8,
  parameter int LOG2P     = 16,
  parameter int BUF_DEPTH = 8,
  localparam int NR = 3 + 3 * NPR,
  localparam int NW = 3 + NPR
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t main_base,
  input  idx_t  main_len,
  input  addr_t batch_base,
  input  idx_t  batch_len,
  input  val_t  eps,
  input  addr_t scratch_base,
  input  addr_t res_base,
  output logic  busy,
  output logic  done,
  output logic  [NPR-1:0] seek,
  // memory
  output logic  rd_req_valid [NR],
  input  logic  rd_req_ready [NR],
  output addr_t rd_req_addr  [NR],
  input  logic  rd_rsp_valid [NR],
  input  word_t rd_rsp_data  [NR],
  output logic  wr_valid [NW],
  input  logic  wr_ready [NW],
  output addr_t wr_addr  [NW],
  output word_t wr_data  [NW],
  // index RAM read ports (lower, upper partitioner)
  output logic [LOG2P-1:0] iaddr [2],
  input  idx_t             ipos  [2],
  input  val_t             ival  [2]
);
  localparam int NS  = NPR / 2;
  localparam int LNS = $clog2(NS);
  typedef enum logic [1:0] {S_IDLE, S_BOUND, S_PART, S_PROBE} state_e;
  state_e state;

  addr_t mb, bb, sb, rb;
  idx_t  m, n;
  val_t  e;
  logic  bg_start, bg_done, bg_busy, pt_start, pr_start;
  logic  [1:0] pt_done, pt_busy, pt_fin;
  logic  [NPR-1:0] pr_done, pr_busy, pr_fin;
  idx_t  slice [NS+1];

  always_comb begin
    for (int k = 0; k <= NS; k++) slice[k] = idx_t'((64'(n) * 64'(k)) >> LNS);
  end

  boundary_generator u_bgen (
    .clk, .rst_n, .start(bg_start), .batch_base(bb), .batch_len(n), .eps(e),
    .bound_base(sb), .busy(bg_busy), .done(bg_done),
    .req_valid(rd_req_valid[0]), .req_ready(rd_req_ready[0]), .req_addr(rd_req_addr[0]),
    .rsp_valid(rd_rsp_valid[0]), .rsp_data(rd_rsp_data[0]),
    .wr_valid(wr_valid[0]), .wr_ready(wr_ready[0]), .wr_addr(wr_addr[0]), .wr_data(wr_data[0])
  );

  for (genvar u = 0; u < 2; u++) begin : g_part
    partitioner #(.LOG2P(LOG2P)) u_part (
      .clk, .rst_n, .start(pt_start), .upper(u == 1), .bound_base(sb), .len(n),
      .tgt_base(sb + addr_t'(n) * addr_t'(1 + u)),
      .busy(pt_busy[u]), .done(pt_done[u]),
      .req_valid(rd_req_valid[1+u]), .req_ready(rd_req_ready[1+u]), .req_addr(rd_req_addr[1+u]),
      .rsp_valid(rd_rsp_valid[1+u]), .rsp_data(rd_rsp_data[1+u]),
      .iaddr(iaddr[u]), .ipos(ipos[u]), .ival(ival[u]),
      .wr_valid(wr_valid[1+u]), .wr_ready(wr_ready[1+u]), .wr_addr(wr_addr[1+u]), .wr_data(wr_data[1+u])
    );
  end

  for (genvar k = 0; k < NPR; k++) begin : g_prober
    localparam int UP = k >= NS ? 1 : 0;
    localparam int SL = k % NS;
    prober #(.BUF_DEPTH(BUF_DEPTH)) u_prober (
      .clk, .rst_n, .start(pr_start), .upper(UP == 1),
      .main_base(mb), .main_len(m),
      .bound_base(sb + addr_t'(slice[SL])),
      .tgt_base(sb + addr_t'(n) * addr_t'(1 + UP) + addr_t'(slice[SL])),
      .len(slice[SL+1] - slice[SL]),
      .res_base(rb + addr_t'(n) * addr_t'(UP) + addr_t'(slice[SL])),
      .busy(pr_busy[k]), .done(pr_done[k]), .seek(seek[k]),
      .m_req_valid(rd_req_valid[3+3*k]), .m_req_ready(rd_req_ready[3+3*k]),
      .m_req_addr(rd_req_addr[3+3*k]), .m_rsp_valid(rd_rsp_valid[3+3*k]),
      .m_rsp_data(rd_rsp_data[3+3*k]),
      .b_req_valid(rd_req_valid[4+3*k]), .b_req_ready(rd_req_ready[4+3*k]),
      .b_req_addr(rd_req_addr[4+3*k]), .b_rsp_valid(rd_rsp_valid[4+3*k]),
      .b_rsp_data(rd_rsp_data[4+3*k]),
      .t_req_valid(rd_req_valid[5+3*k]), .t_req_ready(rd_req_ready[5+3*k]),
      .t_req_addr(rd_req_addr[5+3*k]), .t_rsp_valid(rd_rsp_valid[5+3*k]),
      .t_rsp_data(rd_rsp_data[5+3*k]),
      .wr_valid(wr_valid[3+k]), .wr_ready(wr_ready[3+k]), .wr_addr(wr_addr[3+k]), .wr_data(wr_data[3+k])
    );
  end

  assign busy = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; mb <= '0; bb <= '0; sb <= '0; rb <= '0;
      m <= '0; n <= '0; e <= '0; bg_start <= 1'b0; pt_start <= 1'b0; pr_start <= 1'b0;
      pt_fin <= '0; pr_fin <= '0;
    end else begin
      done <= 1'b0; bg_start <= 1'b0; pt_start <= 1'b0; pr_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          mb <= main_base; m <= main_len; bb <= batch_base; n <= batch_len;
          e <= eps; sb <= scratch_base; rb <= res_base;
          bg_start <= 1'b1;
          state    <= S_BOUND;
        end
        S_BOUND: if (bg_done) begin
          pt_start <= 1'b1; pt_fin <= '0;
          state    <= S_PART;
        end
        S_PART: begin
          pt_fin <= pt_fin | pt_done;
          if ((pt_fin | pt_done) == '1) begin
            pr_start <= 1'b1; pr_fin <= '0;
            state    <= S_PROBE;
          end
        end
        S_PROBE: begin
          pr_fin <= pr_fin | pr_done;
          if (!pr_start && (pr_fin | pr_done) == '1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
