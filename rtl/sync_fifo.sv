// Synchronous FIFO used as the stream buffers of the mergers and probers.
//
// DEPTH entries of W bits held in a register array; push and pop may happen
// in the same cycle. `clear` empties it in one cycle (a prober that seeks to
// a new partition throws away what it had read ahead). `count` is the fill
// level. Data appears at `rd_data` whenever `count` is non-zero (show-ahead).
// DEPTH must be a power of two.
module sync_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !clear) mem[wp] <= wr_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && count == DEPTH[AW:0]))
    else $error("sync_fifo overflow");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && count == 0))
    else $error("sync_fifo underflow");
endmodule
