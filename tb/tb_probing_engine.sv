// Test of the probing engine with 8 probers: a random sorted main array and
// its index (built here, held in a registered-read array) are probed with
// sorted band and equi-join batches. Every <id_start, id_end> record must
// equal the brute-force counts of tuples below v-eps and not above v+eps.
// Batch sizes not divisible by the slice count and a batch of one tuple are
// included; memory stalls are random.
module tb_probing_engine;
  import bisort_pkg::*;
  localparam int NPR = 8, LOG2P = 6, P = 1 << LOG2P, NR = 3 + 3 * NPR, NW = 3 + NPR;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, busy, done;
  logic  [NPR-1:0] seek;
  addr_t main_base = 0, batch_base = 100000, scratch_base = 200000, res_base = 300000;
  idx_t  main_len, batch_len;
  val_t  eps;
  logic  rv [NR], rr [NR], sv [NR];
  addr_t ra [NR];
  word_t sd [NR];
  logic  wv [NW], wr [NW];
  addr_t wa [NW];
  word_t wd [NW];
  logic [LOG2P-1:0] iaddr [2];
  idx_t  ipos [2];
  val_t  ival [2];
  idx_t  ix_pos [P];
  val_t  ix_val [P];
  int checks = 0, failures = 0, seeks = 0;

  always @(posedge clk) for (int u = 0; u < 2; u++) begin ipos[u] <= ix_pos[iaddr[u]]; ival[u] <= ix_val[iaddr[u]]; end
  always @(posedge clk) seeks += $countones(seek);

  probing_engine #(.NPR(NPR), .LOG2P(LOG2P)) dut (
    .clk, .rst_n, .start, .main_base, .main_len, .batch_base, .batch_len, .eps, .scratch_base,
    .res_base, .busy, .done, .seek,
    .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv), .rd_rsp_data(sd),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd), .iaddr, .ipos, .ival);
  ddr3_model #(.NR(NR), .NW(NW), .LAT(6), .STALL(20)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int unsigned mv[$];

  task automatic load(int m, int unsigned range);
    mv = {};
    for (int k = 0; k < m; k++) mv.push_back($urandom % range);
    mv.sort();
    for (int k = 0; k < m; k++) mem0.mem_write(main_base + addr_t'(k), {32'(k), mv[k]});
    for (int p = 0; p < P; p++) begin ix_pos[p] = idx_t'((p * m) / P); ix_val[p] = mv[(p * m) / P]; end
  endtask

  task automatic one(int n, int unsigned range, int unsigned e);
    int unsigned bv[$];
    for (int k = 0; k < n; k++) bv.push_back($urandom % range);
    bv.sort();
    for (int k = 0; k < n; k++) mem0.mem_write(batch_base + addr_t'(k), {32'(k), bv[k]});
    @(negedge clk);
    main_len = idx_t'(mv.size()); batch_len = idx_t'(n); eps = e;
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    for (int k = 0; k < n; k++) begin
      longint lo, hi; int s, t;
      lo = longint'(bv[k]) - longint'(e); hi = longint'(bv[k]) + longint'(e);
      s = 0; t = 0;
      foreach (mv[i]) begin if (longint'(mv[i]) < lo) s++; if (longint'(mv[i]) <= hi) t++; end
      check(mem0.mem_read(res_base + addr_t'(k)) == word_t'(s) &&
            mem0.mem_read(res_base + addr_t'(n + k)) == word_t'(t),
            $sformatf("probe %0d v=%0d: [%0d,%0d) expected [%0d,%0d)", k, bv[k],
                      mem0.mem_read(res_base + addr_t'(k)), mem0.mem_read(res_base + addr_t'(n + k)), s, t));
    end
  endtask

  initial begin
    main_len = '0; batch_len = '0; eps = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    load(3000, 100000);
    one(101, 110000, 50);
    one(64, 110000, 0);
    one(1, 100000, 1000);
    load(800, 50);
    one(77, 60, 0);
    one(20, 60, 3);
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
