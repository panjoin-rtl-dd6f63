// Behavioural model of external DDR3 memory, for simulation only.
//
// Not a model of DDR3 timing: it is an ideal memory with NR read ports and
// NW write ports sharing one sparse array of 64-bit words. Each port
// accepts at most one request per cycle; when STALL > 0 a port's ready is
// randomly low that percentage of cycles, to exercise back-pressure. A read
// answers exactly LAT cycles after it is accepted, in order, with the word
// as it was when the read was accepted. A write takes effect when accepted.
// Words never written read as zero. Testbenches load and inspect the array
// with the mem_write / mem_read functions.
module ddr3_model
  import bisort_pkg::*;
#(
  parameter int NR    = 2,
  parameter int NW    = 2,
  parameter int LAT   = 6,
  parameter int STALL = 0
) (
  input  logic  clk,
  input  logic  rd_req_valid [NR],
  output logic  rd_req_ready [NR],
  input  addr_t rd_req_addr  [NR],
  output logic  rd_rsp_valid [NR],
  output word_t rd_rsp_data  [NR],
  input  logic  wr_valid [NW],
  output logic  wr_ready [NW],
  input  addr_t wr_addr  [NW],
  input  word_t wr_data  [NW]
);
  word_t mem [addr_t];
  logic  pv [NR][LAT];
  word_t pd [NR][LAT];
  longint unsigned reads = 0, writes = 0;

  function automatic void mem_write(addr_t a, word_t d);
    mem[a] = d;
  endfunction
  function automatic word_t mem_read(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    for (int i = 0; i < NR; i++) begin
      rd_req_ready[i] = 1'b1;
      for (int s = 0; s < LAT; s++) begin pv[i][s] = 1'b0; pd[i][s] = '0; end
    end
    for (int i = 0; i < NW; i++) wr_ready[i] = 1'b1;
  end

  always_comb begin
    for (int i = 0; i < NR; i++) begin
      rd_rsp_valid[i] = pv[i][LAT-1];
      rd_rsp_data[i]  = pd[i][LAT-1];
    end
  end

  always @(posedge clk) begin
    for (int i = 0; i < NW; i++)
      if (wr_valid[i] && wr_ready[i]) begin mem[wr_addr[i]] = wr_data[i]; writes++; end
    for (int i = 0; i < NR; i++) begin
      for (int s = LAT - 1; s > 0; s--) begin pv[i][s] <= pv[i][s-1]; pd[i][s] <= pd[i][s-1]; end
      pv[i][0] <= rd_req_valid[i] && rd_req_ready[i];
      pd[i][0] <= mem_read(rd_req_addr[i]);
      if (rd_req_valid[i] && rd_req_ready[i]) reads++;
    end
    for (int i = 0; i < NR; i++) rd_req_ready[i] <= ($urandom % 100) >= STALL;
    for (int i = 0; i < NW; i++) wr_ready[i]     <= ($urandom % 100) >= STALL;
  end
endmodule
