// Boundary generator of the probing engine.
//
// For every tuple of the sorted probe batch it computes the band of the
// join condition, lower = v - eps and upper = v + eps (the paper's band
// join "s.value BETWEEN r.value - eps AND r.value + eps"), and writes the
// pair to the bound array in memory as one word {upper, lower}. With
// eps = 0 the pair describes the equi-join, which the paper turns into the
// band [v, v+). Both bounds saturate at the ends of the unsigned 32-bit
// range instead of wrapping; that is this design's choice.
//
// The batch is read as a stream (stream_reader) and one bound word is
// written per cycle while the write port is ready. `done` pulses one cycle
// after the last write is accepted.
module boundary_generator
  import bisort_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t batch_base,
  input  idx_t  batch_len,
  input  val_t  eps,
  input  addr_t bound_base,
  output logic  busy,
  output logic  done,
  // read port
  output logic  req_valid,
  input  logic  req_ready,
  output addr_t req_addr,
  input  logic  rsp_valid,
  input  word_t rsp_data,
  // write port
  output logic  wr_valid,
  input  logic  wr_ready,
  output addr_t wr_addr,
  output word_t wr_data
);
  logic  s_valid, s_ready, idle;
  word_t s_data;
  idx_t  rem;
  addr_t waddr;
  val_t  e, v, lo, hi;
  logic [VAL_W:0] sum;

  stream_reader #(.DEPTH(8)) u_rd (
    .clk, .rst_n, .start, .base(batch_base), .len(batch_len),
    .req_valid, .req_ready, .req_addr, .rsp_valid, .rsp_data,
    .s_valid, .s_ready, .s_data, .idle
  );

  always_comb begin
    v   = val_of(s_data);
    lo  = v >= e ? v - e : '0;
    sum = {1'b0, v} + {1'b0, e};
    hi  = sum[VAL_W] ? '1 : sum[VAL_W-1:0];
  end

  assign wr_valid = busy && s_valid;
  assign wr_addr  = waddr;
  assign wr_data  = {hi, lo};
  assign s_ready  = busy && wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rem <= '0; waddr <= '0; e <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem <= batch_len; waddr <= bound_base; e <= eps;
        busy <= batch_len != '0;
        done <= batch_len == '0;
      end else if (wr_valid && wr_ready) begin
        rem   <= rem - 1'b1;
        waddr <= waddr + 1'b1;
        if (rem == idx_t'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
