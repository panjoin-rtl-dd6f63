// Test of the indexer: for sorted main arrays of several lengths (shorter
// and longer than P) every index entry p written must hold position
// floor(p*M/P) and that tuple's value, each entry written once. Memory
// stalls are random. With M = 0 nothing may be written.
module tb_indexer;
  import bisort_pkg::*;
  localparam int LOG2P = 5, P = 1 << LOG2P;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, busy, done, we;
  addr_t main_base = 300;
  idx_t  main_len, wpos;
  val_t  wval;
  logic [LOG2P-1:0] waddr;
  logic  rv [1], rr [1], sv [1];
  addr_t ra [1];
  word_t sd [1];
  logic  wv [1], wr [1];
  addr_t wa [1];
  word_t wd [1];
  idx_t  got_pos [P];
  val_t  got_val [P];
  int    got_n [P];
  int checks = 0, failures = 0;

  assign wv[0] = 1'b0; assign wa[0] = '0; assign wd[0] = '0;

  indexer #(.LOG2P(LOG2P)) dut (
    .clk, .rst_n, .start, .main_base, .main_len, .busy, .done,
    .req_valid(rv[0]), .req_ready(rr[0]), .req_addr(ra[0]), .rsp_valid(sv[0]), .rsp_data(sd[0]),
    .we, .waddr, .wpos, .wval);
  ddr3_model #(.NR(1), .NW(1), .LAT(7), .STALL(30)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  always @(posedge clk) if (we) begin
    got_pos[waddr] <= wpos; got_val[waddr] <= wval; got_n[waddr] <= got_n[waddr] + 1;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic one(int m);
    int unsigned v[$];
    for (int k = 0; k < m; k++) v.push_back($urandom);
    v.sort();
    for (int k = 0; k < m; k++) mem0.mem_write(main_base + addr_t'(k), {32'hdead_0000 | 32'(k), v[k]});
    for (int p = 0; p < P; p++) got_n[p] = 0;
    @(negedge clk);
    main_len = idx_t'(m);
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int p = 0; p < P; p++) begin
      if (m == 0) check(got_n[p] == 0, "write with empty array");
      else begin
        int pos;
        pos = (p * m) / P;
        check(got_n[p] == 1 && got_pos[p] == idx_t'(pos) && got_val[p] == v[pos],
              $sformatf("M=%0d entry %0d: n=%0d pos=%0d val=%h expected pos=%0d val=%h",
                        m, p, got_n[p], got_pos[p], got_val[p], pos, v[pos]));
      end
    end
  endtask

  initial begin
    main_len = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    one(1000); one(7); one(32); one(0); one(33);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
