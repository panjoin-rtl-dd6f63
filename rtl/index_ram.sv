// On-chip index array of BI-Sort.
//
// P entries, one per partition of the main array. Entry p holds the value
// of the first tuple of partition p and that tuple's position in the main
// array. The paper keeps the sampled values only ("samples the value of
// every M/P tuple"); storing the position as well is this design's choice,
// so that the partitioners can hand the probers a start address without a
// multiplier (the paper's FPGA build reports no DSP blocks in use).
// The paper's P is 64K entries; as 56-bit words that is 3.5 Mbit of block
// RAM, inside the 31 % of block memory the paper reports.
//
// One write port (the indexer) and two read ports (the two partitioners),
// reads registered: data appears one cycle after the address.
module index_ram
  import bisort_pkg::*;
#(
  parameter int LOG2P = 16
) (
  input  logic             clk,
  input  logic             we,
  input  logic [LOG2P-1:0] waddr,
  input  idx_t             wpos,
  input  val_t             wval,
  input  logic [LOG2P-1:0] raddr0,
  output idx_t             rpos0,
  output val_t             rval0,
  input  logic [LOG2P-1:0] raddr1,
  output idx_t             rpos1,
  output val_t             rval1
);
  localparam int P = 1 << LOG2P;
  logic [IDX_W+VAL_W-1:0] mem [P];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= {wpos, wval};
    {rpos0, rval0} <= mem[raddr0];
    {rpos1, rval1} <= mem[raddr1];
  end
endmodule
