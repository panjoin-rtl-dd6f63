// Workload run of the BI-Sort worker node at its default size (8M-tuple
// subwindow, P = 64K, 8 mergers, 8 probers), after the FPGA evaluation
// setup: insertion of sorted batches of 1K, 8K, 64K, 512K and 4M tuples,
// then equi-join probes (eps = 0, about one match per probe tuple) with
// batches of 1K, 8K, 64K and 512K tuples against the 4.79M-tuple
// subwindow. A 4M-tuple probe follows the same path and is left out only
// for simulation time (about 40M cycles). Runs in about a minute and needs
// about 1 GB of simulator memory.
//
// Every main-array word, every index entry and every result record is
// checked against a reference kept here (stable merge; lower/upper bound by
// binary search). The cycle count of each command is printed with the
// throughput it would give at 252.7 MHz. The memory is the ideal
// ddr3_model (one word per cycle per channel, fixed latency), not DDR3
// timing, so these rates are an upper bound set by the logic only.
module tb_bisort_workload;
  import bisort_pkg::*;
  localparam int LOG2P = 16, NPR = 8;
  // value range chosen so that an equi-join probe finds about one match
  // once all batches are in (4,791,552 tuples over 2^22 values)
  localparam int unsigned RANGE = 1 << 22;
  localparam addr_t BATCH = addr_t'(32'h0100_0000), SCR = addr_t'(32'h0200_0000),
                    RES = addr_t'(32'h0300_0000);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  cmd_valid = 1'b0, cmd_ready, done;
  cmd_t  cmd;
  idx_t  sub_len;
  logic  sub_empty, sub_full;
  addr_t main_base;
  logic  [NPR-1:0] prober_seek;
  logic  ddr_rd_req_valid [2], ddr_rd_req_ready [2], ddr_rd_rsp_valid [2];
  addr_t ddr_rd_req_addr  [2];
  word_t ddr_rd_rsp_data  [2];
  logic  ddr_wr_valid [2], ddr_wr_ready [2];
  addr_t ddr_wr_addr  [2];
  word_t ddr_wr_data  [2];

  bisort_worker dut (.*);

  ddr3_model #(.NR(2), .NW(2), .LAT(10), .STALL(0)) u_mem (
    .clk, .rd_req_valid(ddr_rd_req_valid), .rd_req_ready(ddr_rd_req_ready),
    .rd_req_addr(ddr_rd_req_addr), .rd_rsp_valid(ddr_rd_rsp_valid), .rd_rsp_data(ddr_rd_rsp_data),
    .wr_valid(ddr_wr_valid), .wr_ready(ddr_wr_ready), .wr_addr(ddr_wr_addr), .wr_data(ddr_wr_data)
  );

  int checks = 0, failures = 0;
  word_t ref_main[$];
  int unsigned key_ctr = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(cmd_t c, output longint cycles);
    longint t0;
    @(negedge clk);
    cmd = c; cmd_valid = 1'b1;
    t0 = 0;
    do begin @(posedge clk); t0++; end while (!cmd_ready);
    @(negedge clk); cmd_valid = 1'b0;
    while (!done) begin @(posedge clk); t0++; end
    cycles = t0;
  endtask

  task automatic make_batch(int n, int unsigned range, output word_t b[$]);
    int unsigned v[$];
    b = {};
    for (int i = 0; i < n; i++) v.push_back($urandom % range);
    v.sort();
    for (int i = 0; i < n; i++) begin
      b.push_back({key_ctr, v[i]});
      key_ctr++;
      u_mem.mem_write(BATCH + addr_t'(i), b[i]);
    end
  endtask

  // number of reference tuples with value < x (strict) or <= x
  function automatic int count_below(longint x, bit inclusive);
    int lo, hi;
    lo = 0; hi = ref_main.size();
    while (lo < hi) begin
      int mid;
      mid = (lo + hi) / 2;
      if (inclusive ? longint'(ref_main[mid][31:0]) <= x : longint'(ref_main[mid][31:0]) < x) lo = mid + 1;
      else hi = mid;
    end
    return lo;
  endfunction

  task automatic insert(word_t b[$]);
    cmd_t c; longint cyc; word_t merged[$]; int i, j; idx_t m;
    c = '0; c.op = OP_INSERT; c.batch_addr = BATCH; c.batch_len = idx_t'(b.size());
    run(c, cyc);
    i = 0; j = 0;
    while (i < ref_main.size() || j < b.size()) begin
      if (j == b.size() || (i < ref_main.size() && ref_main[i][31:0] <= b[j][31:0]))
        begin merged.push_back(ref_main[i]); i++; end
      else begin merged.push_back(b[j]); j++; end
    end
    ref_main = merged;
    m = idx_t'(ref_main.size());
    check(sub_len == m, "subwindow length");
    for (int k = 0; k < ref_main.size(); k++)
      check(u_mem.mem_read(main_base + addr_t'(k)) == ref_main[k], $sformatf("main[%0d]", k));
    for (int p = 0; p < (1 << LOG2P); p++) begin
      longint pos;
      pos = (longint'(p) * longint'(m)) >> LOG2P;
      check(dut.u_index.mem[p] == {idx_t'(pos), ref_main[pos][31:0]}, $sformatf("index[%0d]", p));
    end
    $display("insert N_Bat=%0d into %0d: %0d cycles, %0.1f M tuples/s at 252.7 MHz",
             b.size(), m - idx_t'(b.size()), cyc, real'(b.size()) * 252.7 / real'(cyc));
  endtask

  task automatic probe(word_t b[$]);
    cmd_t c; longint cyc; longint n_match;
    c = '0; c.op = OP_PROBE; c.batch_addr = BATCH; c.batch_len = idx_t'(b.size());
    c.eps = 0; c.scratch_addr = SCR; c.res_addr = RES;
    run(c, cyc);
    n_match = 0;
    for (int j = 0; j < b.size(); j++) begin
      int s, e;
      s = count_below(longint'(b[j][31:0]), 1'b0);
      e = count_below(longint'(b[j][31:0]), 1'b1);
      n_match += e - s;
      check(u_mem.mem_read(RES + addr_t'(j)) == word_t'(s) &&
            u_mem.mem_read(RES + addr_t'(b.size() + j)) == word_t'(e), $sformatf("record %0d", j));
    end
    $display("probe N_Bat=%0d, S=%0.2f, subwindow %0d: %0d cycles, %0.1f M tuples/s at 252.7 MHz",
             b.size(), real'(n_match) / real'(b.size()), ref_main.size(), cyc,
             real'(b.size()) * 252.7 / real'(cyc));
  endtask

  initial begin
    word_t b[$];
    cmd_t c; longint cyc;
    cmd = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    c = '0; c.op = OP_CREATE; run(c, cyc);
    make_batch(1024, RANGE, b);    insert(b);
    make_batch(8192, RANGE, b);    insert(b);
    make_batch(65536, RANGE, b);   insert(b);
    make_batch(524288, RANGE, b);  insert(b);
    make_batch(4194304, RANGE, b); insert(b);
    make_batch(1024, RANGE, b);    probe(b);
    make_batch(8192, RANGE, b);    probe(b);
    make_batch(65536, RANGE, b);   probe(b);
    make_batch(524288, RANGE, b);  probe(b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
