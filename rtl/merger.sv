// Merger of the insertion engine (Fig. 8 of the paper).
//
// Merges two sorted runs that lie in external memory, run A (a piece of the
// current main array) and run B (a piece of the sorted batch), into one
// sorted run written back to memory. Each input run is read as a stream
// into its own buffer (a stream_reader); a comparator looks at the two
// buffer heads, writes the smaller tuple to the output stream and takes the
// next tuple from the run it came from, as the paper describes. The figure's
// comparator is "<": the B tuple is taken only when it is strictly smaller,
// so equal values keep main-array tuples first (older tuples stay first).
// Once one run is used up the rest of the other is copied.
//
// Timing: after `start`, one tuple per cycle is written whenever both
// buffer heads are present and the write port is ready; `done` pulses one
// cycle after the last tuple's write is accepted. Lengths may be zero.
module merger
  import bisort_pkg::*;
#(
  parameter int BUF_DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t a_base,
  input  idx_t  a_len,
  input  addr_t b_base,
  input  idx_t  b_len,
  input  addr_t out_base,
  output logic  busy,
  output logic  done,
  // read port of stream A
  output logic  a_req_valid,
  input  logic  a_req_ready,
  output addr_t a_req_addr,
  input  logic  a_rsp_valid,
  input  word_t a_rsp_data,
  // read port of stream B
  output logic  b_req_valid,
  input  logic  b_req_ready,
  output addr_t b_req_addr,
  input  logic  b_rsp_valid,
  input  word_t b_rsp_data,
  // write port of the result stream
  output logic  wr_valid,
  input  logic  wr_ready,
  output addr_t wr_addr,
  output word_t wr_data
);
  logic  a_valid, b_valid, a_pop, b_pop, a_idle, b_idle;
  word_t a_data, b_data;
  idx_t  rem_a, rem_b;
  addr_t out_addr;
  logic  sel_b, can_emit, fire;

  stream_reader #(.DEPTH(BUF_DEPTH)) u_rd_a (
    .clk, .rst_n, .start, .base(a_base), .len(a_len),
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req_addr(a_req_addr),
    .rsp_valid(a_rsp_valid), .rsp_data(a_rsp_data),
    .s_valid(a_valid), .s_ready(a_pop), .s_data(a_data), .idle(a_idle)
  );
  stream_reader #(.DEPTH(BUF_DEPTH)) u_rd_b (
    .clk, .rst_n, .start, .base(b_base), .len(b_len),
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .rsp_valid(b_rsp_valid), .rsp_data(b_rsp_data),
    .s_valid(b_valid), .s_ready(b_pop), .s_data(b_data), .idle(b_idle)
  );

  always_comb begin
    sel_b    = 1'b0;
    can_emit = 1'b0;
    if (busy) begin
      if (rem_a == '0) begin
        sel_b = 1'b1; can_emit = rem_b != '0 && b_valid;
      end else if (rem_b == '0) begin
        sel_b = 1'b0; can_emit = a_valid;
      end else begin
        sel_b = val_of(b_data) < val_of(a_data);
        can_emit = a_valid && b_valid;
      end
    end
  end

  assign wr_valid = can_emit;
  assign wr_addr  = out_addr;
  assign wr_data  = sel_b ? b_data : a_data;
  assign fire     = can_emit && wr_ready;
  assign a_pop    = fire && !sel_b;
  assign b_pop    = fire && sel_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rem_a <= '0; rem_b <= '0; out_addr <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        rem_a    <= a_len;
        rem_b    <= b_len;
        out_addr <= out_base;
      end else if (busy) begin
        if (fire) begin
          out_addr <= out_addr + 1'b1;
          if (sel_b) rem_b <= rem_b - 1'b1;
          else       rem_a <= rem_a - 1'b1;
        end
        if ((rem_a == '0 || (fire && !sel_b && rem_a == idx_t'(1))) &&
            (rem_b == '0 || (fire &&  sel_b && rem_b == idx_t'(1)))) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) done |-> a_idle && b_idle)
    else $error("merger finished with reads outstanding");
endmodule
