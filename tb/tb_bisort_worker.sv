// End-to-end test of the BI-Sort worker node at reduced size.
//
// Drives the command port as a manager node would: create a subwindow,
// insert sorted batches of random tuples (with duplicate values, an empty
// batch and a batch larger than the subwindow so far), probe with band and
// equi-join batches, fill the subwindow to full, expire it and start again.
// A reference model kept here (a plain stable merge and a brute-force
// count) checks after every command: the main array word by word, the
// index RAM entry by entry, the subwindow length and status bits, and every
// <id_start, id_end> record. External memory is the ddr3_model with random
// stalls. Each mechanism (merge, index rebuild, band probe, equi probe,
// prober seek, memory stall, full, expire) is counted, and one that never
// happened is a failure.
module tb_bisort_worker;
  import bisort_pkg::*;
  localparam int N_SUB = 4096, LOG2P = 6;
  localparam int NPR = 8;
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

  bisort_worker #(.N_SUB(N_SUB), .LOG2P(LOG2P)) dut (.*);

  ddr3_model #(.NR(2), .NW(2), .LAT(8), .STALL(20)) u_mem (
    .clk, .rd_req_valid(ddr_rd_req_valid), .rd_req_ready(ddr_rd_req_ready),
    .rd_req_addr(ddr_rd_req_addr), .rd_rsp_valid(ddr_rd_rsp_valid), .rd_rsp_data(ddr_rd_rsp_data),
    .wr_valid(ddr_wr_valid), .wr_ready(ddr_wr_ready), .wr_addr(ddr_wr_addr), .wr_data(ddr_wr_data)
  );

  int checks = 0, failures = 0;
  int n_merge = 0, n_index = 0, n_band = 0, n_equi = 0, n_seek = 0, n_stall = 0,
      n_full = 0, n_expire = 0;
  word_t ref_main[$];
  int unsigned key_ctr = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    n_seek += $countones(prober_seek);
    for (int c = 0; c < 2; c++) if (ddr_rd_req_valid[c] && !ddr_rd_req_ready[c]) n_stall++;
  end

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

  // batch of n random tuples, sorted by value, written to BATCH
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
    check(sub_len == m, $sformatf("length %0d, expected %0d", sub_len, m));
    for (int k = 0; k < ref_main.size(); k++)
      check(u_mem.mem_read(main_base + addr_t'(k)) == ref_main[k],
            $sformatf("main[%0d] = %h, expected %h", k, u_mem.mem_read(main_base + addr_t'(k)), ref_main[k]));
    if (m != 0) begin
      for (int p = 0; p < (1 << LOG2P); p++) begin
        longint pos;
        pos = (longint'(p) * longint'(m)) >> LOG2P;
        check(dut.u_index.mem[p] == {idx_t'(pos), ref_main[pos][31:0]},
              $sformatf("index[%0d] = %h", p, dut.u_index.mem[p]));
      end
      n_index++;
    end
    if (b.size() != 0) n_merge++;
    check(sub_full == (m >= idx_t'(N_SUB)), "full flag");
    check(sub_empty == (m == 0), "empty flag");
    if (sub_full) n_full++;
  endtask

  task automatic probe(word_t b[$], int unsigned eps);
    cmd_t c; longint cyc;
    c = '0; c.op = OP_PROBE; c.batch_addr = BATCH; c.batch_len = idx_t'(b.size());
    c.eps = eps; c.scratch_addr = SCR; c.res_addr = RES;
    run(c, cyc);
    for (int j = 0; j < b.size(); j++) begin
      longint lo, hi; int unsigned s, e;
      lo = longint'(b[j][31:0]) - longint'(eps);
      hi = longint'(b[j][31:0]) + longint'(eps);
      s = 0; e = 0;
      foreach (ref_main[k]) begin
        if (longint'(ref_main[k][31:0]) < lo)  s++;
        if (longint'(ref_main[k][31:0]) <= hi) e++;
      end
      check(u_mem.mem_read(RES + addr_t'(j)) == word_t'(s),
            $sformatf("probe %0d id_start %0d expected %0d", j, u_mem.mem_read(RES + addr_t'(j)), s));
      check(u_mem.mem_read(RES + addr_t'(b.size() + j)) == word_t'(e),
            $sformatf("probe %0d id_end %0d expected %0d", j, u_mem.mem_read(RES + addr_t'(b.size() + j)), e));
    end
    if (eps == 0) n_equi++; else n_band++;
    $display("probe of %0d tuples, eps %0d, subwindow %0d: %0d cycles", b.size(), eps, ref_main.size(), cyc);
  endtask

  task automatic simple(op_e op);
    cmd_t c; longint cyc;
    c = '0; c.op = op;
    run(c, cyc);
    ref_main = {};
    check(sub_len == 0 && sub_empty && !sub_full, "empty after create/expire");
    if (op == OP_EXPIRE) n_expire++;
  endtask

  initial begin
    word_t b[$];
    cmd = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    simple(OP_CREATE);
    make_batch(37, 200, b);    insert(b);
    make_batch(0, 200, b);     insert(b);
    make_batch(300, 200, b);   insert(b);   // many duplicates
    make_batch(5, 1000, b);    insert(b);
    make_batch(50, 260, b);    probe(b, 3);
    make_batch(64, 1000, b);   probe(b, 0);
    make_batch(3, 1000, b);    probe(b, 100000);  // band wider than the values
    make_batch(1000, 1 << 30, b); insert(b);
    make_batch(200, 1 << 30, b);  probe(b, 1 << 20);
    make_batch(N_SUB - ref_main.size(), 1 << 30, b); insert(b);
    make_batch(20, 1 << 30, b);   probe(b, 0);
    simple(OP_EXPIRE);
    make_batch(10, 50, b);     insert(b);
    make_batch(10, 50, b);     probe(b, 1);
    check(n_merge > 0,  "no merge happened");
    check(n_index > 0,  "no index rebuild happened");
    check(n_band > 0,   "no band probe happened");
    check(n_equi > 0,   "no equi probe happened");
    check(n_seek > 0,   "no prober seek happened");
    check(n_stall > 0,  "no memory stall happened");
    check(n_full > 0,   "subwindow never became full");
    check(n_expire > 0, "no expire happened");
    $display("mechanisms: merge %0d index %0d band %0d equi %0d seek %0d stall %0d full %0d expire %0d",
             n_merge, n_index, n_band, n_equi, n_seek, n_stall, n_full, n_expire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
