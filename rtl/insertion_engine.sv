// Insertion engine of the BI-Sort worker node (left half of Fig. 7).
//
// Merges a sorted batch into the sorted main array and rebuilds the index.
// The current main array and the batch stay where they are in external
// memory; the merged array is written to a second region (out_base), which
// becomes the main array afterwards. Steps, one after the other:
//   1. merge_splitter cuts the merge into NM equal pieces;
//   2. NM mergers merge their pieces at the same time;
//   3. once every merger is done, the indexer samples the new array into
//      the index RAM.
// The paper gives the mergers, the indexer and their order; the co-rank
// split and the two-region (ping-pong) main array are this design's choices.
//
// Memory ports, as flat arrays: read port 0 is the splitter, 1+2k and 2+2k
// are merger k's main-array and batch streams, 1+2*NM is the indexer;
// write port k is merger k. `done` pulses when the index is rebuilt.
module insertion_engine
  import bisort_pkg::*;
#(
  parameter int NM        = 8,
  parameter int LOG2P     = 16,
  parameter int BUF_DEPTH = 8,
  localparam int NR = 2 * NM + 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t main_base,
  input  idx_t  main_len,
  input  addr_t batch_base,
  input  idx_t  batch_len,
  input  addr_t out_base,
  output logic  busy,
  output logic  done,
  // memory
  output logic  rd_req_valid [NR],
  input  logic  rd_req_ready [NR],
  output addr_t rd_req_addr  [NR],
  input  logic  rd_rsp_valid [NR],
  input  word_t rd_rsp_data  [NR],
  output logic  wr_valid [NM],
  input  logic  wr_ready [NM],
  output addr_t wr_addr  [NM],
  output word_t wr_data  [NM],
  // index RAM write port
  output logic             idx_we,
  output logic [LOG2P-1:0] idx_waddr,
  output idx_t             idx_wpos,
  output val_t             idx_wval
);
  typedef enum logic [1:0] {S_IDLE, S_SPLIT, S_MERGE, S_INDEX} state_e;
  state_e state;

  idx_t  a_split [NM+1];
  idx_t  b_split [NM+1];
  logic  split_done, merge_start, idx_start, idx_done, idx_busy;
  logic  [NM-1:0] m_done, m_busy, finished;
  addr_t mb, bb, ob;
  idx_t  total;

  merge_splitter #(.NM(NM)) u_split (
    .clk, .rst_n, .start(start && state == S_IDLE),
    .a_base(main_base), .a_len(main_len), .b_base(batch_base), .b_len(batch_len),
    .a_split, .b_split, .done(split_done),
    .req_valid(rd_req_valid[0]), .req_ready(rd_req_ready[0]), .req_addr(rd_req_addr[0]),
    .rsp_valid(rd_rsp_valid[0]), .rsp_data(rd_rsp_data[0])
  );

  for (genvar k = 0; k < NM; k++) begin : g_merger
    merger #(.BUF_DEPTH(BUF_DEPTH)) u_merger (
      .clk, .rst_n, .start(merge_start),
      .a_base(mb + addr_t'(a_split[k])), .a_len(a_split[k+1] - a_split[k]),
      .b_base(bb + addr_t'(b_split[k])), .b_len(b_split[k+1] - b_split[k]),
      .out_base(ob + addr_t'(a_split[k] + b_split[k])),
      .busy(m_busy[k]), .done(m_done[k]),
      .a_req_valid(rd_req_valid[1+2*k]), .a_req_ready(rd_req_ready[1+2*k]),
      .a_req_addr(rd_req_addr[1+2*k]), .a_rsp_valid(rd_rsp_valid[1+2*k]),
      .a_rsp_data(rd_rsp_data[1+2*k]),
      .b_req_valid(rd_req_valid[2+2*k]), .b_req_ready(rd_req_ready[2+2*k]),
      .b_req_addr(rd_req_addr[2+2*k]), .b_rsp_valid(rd_rsp_valid[2+2*k]),
      .b_rsp_data(rd_rsp_data[2+2*k]),
      .wr_valid(wr_valid[k]), .wr_ready(wr_ready[k]), .wr_addr(wr_addr[k]), .wr_data(wr_data[k])
    );
  end

  indexer #(.LOG2P(LOG2P)) u_indexer (
    .clk, .rst_n, .start(idx_start), .main_base(ob), .main_len(total),
    .busy(idx_busy), .done(idx_done),
    .req_valid(rd_req_valid[NR-1]), .req_ready(rd_req_ready[NR-1]), .req_addr(rd_req_addr[NR-1]),
    .rsp_valid(rd_rsp_valid[NR-1]), .rsp_data(rd_rsp_data[NR-1]),
    .we(idx_we), .waddr(idx_waddr), .wpos(idx_wpos), .wval(idx_wval)
  );

  assign merge_start = state == S_SPLIT && split_done;
  assign idx_start   = state == S_MERGE && (finished | m_done) == '1;
  assign busy        = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; finished <= '0; mb <= '0; bb <= '0; ob <= '0; total <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          mb <= main_base; bb <= batch_base; ob <= out_base;
          total <= main_len + batch_len;
          state <= S_SPLIT;
        end
        S_SPLIT: if (split_done) begin
          finished <= '0;
          state    <= S_MERGE;
        end
        S_MERGE: begin
          finished <= finished | m_done;
          if (idx_start) state <= S_INDEX;
        end
        S_INDEX: if (idx_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
