// Test of the merger: merges random sorted runs with many equal values
// (tuple keys make the order of equal values visible) and compares the
// output with a stable merge computed here, main-array tuples first on
// ties. Also runs empty runs, and checks the rate: with a memory that never
// stalls, n tuples must be written within n + 24 cycles of start.
module tb_merger;
  import bisort_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, busy, done;
  addr_t a_base, b_base, out_base;
  idx_t  a_len, b_len;
  logic  rv [2], rr [2], sv [2];
  addr_t ra [2];
  word_t sd [2];
  logic  wv [1], wr [1];
  addr_t wa [1];
  word_t wd [1];
  int checks = 0, failures = 0;

  merger dut (
    .clk, .rst_n, .start, .a_base, .a_len, .b_base, .b_len, .out_base, .busy, .done,
    .a_req_valid(rv[0]), .a_req_ready(rr[0]), .a_req_addr(ra[0]), .a_rsp_valid(sv[0]), .a_rsp_data(sd[0]),
    .b_req_valid(rv[1]), .b_req_ready(rr[1]), .b_req_addr(ra[1]), .b_rsp_valid(sv[1]), .b_rsp_data(sd[1]),
    .wr_valid(wv[0]), .wr_ready(wr[0]), .wr_addr(wa[0]), .wr_data(wd[0])
  );
  ddr3_model #(.NR(2), .NW(1), .LAT(5), .STALL(0)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic one(int na, int nb, int range, bit timed);
    word_t a[$], b[$], ref_q[$];
    int unsigned va[$], vb[$];
    int i, j, cyc;
    for (int k = 0; k < na; k++) va.push_back($urandom % range);
    for (int k = 0; k < nb; k++) vb.push_back($urandom % range);
    va.sort(); vb.sort();
    for (int k = 0; k < na; k++) begin a.push_back({32'(k), va[k]}); mem0.mem_write(addr_t'(1000 + k), a[k]); end
    for (int k = 0; k < nb; k++) begin b.push_back({32'(k) | 32'h8000_0000, vb[k]}); mem0.mem_write(addr_t'(5000 + k), b[k]); end
    i = 0; j = 0;
    while (i < na || j < nb) begin
      if (j == nb || (i < na && a[i][31:0] <= b[j][31:0])) begin ref_q.push_back(a[i]); i++; end
      else begin ref_q.push_back(b[j]); j++; end
    end
    @(negedge clk);
    a_base = 1000; a_len = idx_t'(na); b_base = 5000; b_len = idx_t'(nb); out_base = 20000;
    start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int k = 0; k < na + nb; k++)
      check(mem0.mem_read(addr_t'(20000 + k)) == ref_q[k],
            $sformatf("out[%0d]=%h expected %h", k, mem0.mem_read(addr_t'(20000 + k)), ref_q[k]));
    if (timed) check(cyc <= na + nb + 24, $sformatf("%0d tuples took %0d cycles", na + nb, cyc));
  endtask

  initial begin
    a_base = '0; b_base = '0; out_base = '0; a_len = '0; b_len = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    one(100, 60, 40, 1'b1);
    one(0, 17, 10, 1'b1);
    one(23, 0, 10, 1'b1);
    one(0, 0, 10, 1'b0);
    one(300, 300, 1000000, 1'b1);
    one(1, 200, 5, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
