// Test of the prober: a random sorted main array with duplicate values, a
// sorted run of bounds and, for each bound, a target start position that
// is some partition start at or before the answer (as a partitioner would
// give). For lower bounds the result must be the count of tuples below the
// bound; for upper bounds the count of tuples not above it (brute force
// here). Bounds past the last tuple must give M. Seeks must occur.
module tb_prober;
  import bisort_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, upper = 1'b0, busy, done, seek;
  addr_t main_base = 10, bound_base = 5000, tgt_base = 6000, res_base = 7000;
  idx_t  main_len, len;
  logic  rv [3], rr [3], sv [3];
  addr_t ra [3];
  word_t sd [3];
  logic  wv [1], wr [1];
  addr_t wa [1];
  word_t wd [1];
  int checks = 0, failures = 0, seeks = 0;

  prober dut (
    .clk, .rst_n, .start, .upper, .main_base, .main_len, .bound_base, .tgt_base, .len, .res_base,
    .busy, .done, .seek,
    .m_req_valid(rv[0]), .m_req_ready(rr[0]), .m_req_addr(ra[0]), .m_rsp_valid(sv[0]), .m_rsp_data(sd[0]),
    .b_req_valid(rv[1]), .b_req_ready(rr[1]), .b_req_addr(ra[1]), .b_rsp_valid(sv[1]), .b_rsp_data(sd[1]),
    .t_req_valid(rv[2]), .t_req_ready(rr[2]), .t_req_addr(ra[2]), .t_rsp_valid(sv[2]), .t_rsp_data(sd[2]),
    .wr_valid(wv[0]), .wr_ready(wr[0]), .wr_addr(wa[0]), .wr_data(wd[0]));
  ddr3_model #(.NR(3), .NW(1), .LAT(6), .STALL(15)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  always @(posedge clk) if (seek) seeks++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic one(int m, int n, int unsigned range, bit up, int stride);
    int unsigned mv[$], bv[$];
    int exp_r[$];
    for (int k = 0; k < m; k++) mv.push_back($urandom % range);
    mv.sort();
    for (int k = 0; k < m; k++) mem0.mem_write(main_base + addr_t'(k), {32'(k), mv[k]});
    for (int k = 0; k < n; k++) bv.push_back($urandom % (range + range / 8));
    bv.sort();
    for (int k = 0; k < n; k++) begin
      int r, t;
      r = 0;
      foreach (mv[i]) if (up ? mv[i] <= bv[k] : mv[i] < bv[k]) r++;
      exp_r.push_back(r);
      // target: last multiple of `stride` whose tuple is below the bound
      t = 0;
      for (int p = 0; p < m; p += stride) if (up ? mv[p] <= bv[k] : mv[p] < bv[k]) t = p;
      mem0.mem_write(bound_base + addr_t'(k), up ? {bv[k], 32'h0} : {32'hffff_ffff, bv[k]});
      mem0.mem_write(tgt_base + addr_t'(k), word_t'(t));
    end
    @(negedge clk);
    main_len = idx_t'(m); len = idx_t'(n); upper = up;
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    for (int k = 0; k < n; k++)
      check(mem0.mem_read(res_base + addr_t'(k)) == word_t'(exp_r[k]),
            $sformatf("bound %0d=%0d upper %0d: result %0d expected %0d", k, bv[k], up,
                      mem0.mem_read(res_base + addr_t'(k)), exp_r[k]));
  endtask

  initial begin
    main_len = '0; len = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    one(2000, 50, 100000, 1'b0, 64);
    one(2000, 50, 100000, 1'b1, 64);
    one(500, 100, 30, 1'b0, 16);    // many duplicates
    one(500, 100, 30, 1'b1, 16);
    one(0, 10, 30, 1'b0, 16);       // empty main array
    one(100, 1, 1000, 1'b1, 8);
    check(seeks > 0, "no seek happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
