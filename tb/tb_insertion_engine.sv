// Test of the insertion engine with 8 mergers: repeated insertions of
// sorted random batches, ping-ponging between two main-array regions as
// the worker does. After each one the new main array must equal a stable
// merge computed here (old tuples first on equal values) and every index
// write must carry position floor(p*M/P) and its value. Memory stalls are
// random; the run ends with a batch of one tuple into a large array.
module tb_insertion_engine;
  import bisort_pkg::*;
  localparam int NM = 8, LOG2P = 5, P = 1 << LOG2P, NR = 2 * NM + 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, busy, done, idx_we;
  addr_t main_base, batch_base = 200000, out_base;
  idx_t  main_len, batch_len, idx_wpos;
  val_t  idx_wval;
  logic [LOG2P-1:0] idx_waddr;
  logic  rv [NR], rr [NR], sv [NR];
  addr_t ra [NR];
  word_t sd [NR];
  logic  wv [NM], wr [NM];
  addr_t wa [NM];
  word_t wd [NM];
  idx_t  ix_pos [P];
  val_t  ix_val [P];
  int checks = 0, failures = 0;
  int unsigned key = 0;

  insertion_engine #(.NM(NM), .LOG2P(LOG2P)) dut (
    .clk, .rst_n, .start, .main_base, .main_len, .batch_base, .batch_len, .out_base, .busy, .done,
    .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv), .rd_rsp_data(sd),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd),
    .idx_we, .idx_waddr, .idx_wpos, .idx_wval);
  ddr3_model #(.NR(NR), .NW(NM), .LAT(6), .STALL(20)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  always @(posedge clk) if (idx_we) begin ix_pos[idx_waddr] <= idx_wpos; ix_val[idx_waddr] <= idx_wval; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  word_t ref_main[$];
  bit    sel = 0;

  task automatic one(int n, int unsigned range);
    int unsigned v[$];
    word_t b[$], merged[$];
    int i, j, m;
    for (int k = 0; k < n; k++) v.push_back($urandom % range);
    v.sort();
    for (int k = 0; k < n; k++) begin b.push_back({key, v[k]}); key++; mem0.mem_write(batch_base + addr_t'(k), b[k]); end
    i = 0; j = 0;
    while (i < ref_main.size() || j < n) begin
      if (j == n || (i < ref_main.size() && ref_main[i][31:0] <= b[j][31:0])) begin merged.push_back(ref_main[i]); i++; end
      else begin merged.push_back(b[j]); j++; end
    end
    for (int p = 0; p < P; p++) begin ix_pos[p] = '1; ix_val[p] = '1; end
    @(negedge clk);
    main_base = sel ? 100000 : 0; out_base = sel ? 0 : 100000;
    main_len = idx_t'(ref_main.size()); batch_len = idx_t'(n);
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    ref_main = merged; m = merged.size();
    for (int k = 0; k < m; k++)
      check(mem0.mem_read(out_base + addr_t'(k)) == merged[k],
            $sformatf("main[%0d] %h expected %h", k, mem0.mem_read(out_base + addr_t'(k)), merged[k]));
    for (int p = 0; p < P; p++)
      check(ix_pos[p] == idx_t'((p * m) / P) && ix_val[p] == merged[(p * m) / P][31:0],
            $sformatf("index %0d: %0d %h", p, ix_pos[p], ix_val[p]));
    sel = !sel;
  endtask

  initial begin
    main_base = '0; out_base = '0; main_len = '0; batch_len = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    one(100, 1000); one(7, 1000); one(400, 60); one(1000, 1 << 30); one(1, 500);
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
