// Test of the merge splitter: for random sorted runs A and B (with equal
// values across them) the co-ranks found for every split point must match a
// brute-force stable merge done here: a_k is the number of A tuples among
// the first d_k = floor(k*(|A|+|B|)/NM) merged tuples.
module tb_merge_splitter;
  import bisort_pkg::*;
  localparam int NM = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, done;
  addr_t a_base = 100, b_base = 9000;
  idx_t  a_len, b_len;
  idx_t  a_split [NM+1], b_split [NM+1];
  logic  rv [1], rr [1], sv [1];
  addr_t ra [1];
  word_t sd [1];
  logic  wv [1], wr [1];
  addr_t wa [1];
  word_t wd [1];
  int checks = 0, failures = 0;

  assign wv[0] = 1'b0; assign wa[0] = '0; assign wd[0] = '0;

  merge_splitter #(.NM(NM)) dut (
    .clk, .rst_n, .start, .a_base, .a_len, .b_base, .b_len, .a_split, .b_split, .done,
    .req_valid(rv[0]), .req_ready(rr[0]), .req_addr(ra[0]), .rsp_valid(sv[0]), .rsp_data(sd[0]));
  ddr3_model #(.NR(1), .NW(1), .LAT(4), .STALL(25)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic one(int na, int nb, int range);
    int unsigned va[$], vb[$];
    bit from_a[$];
    int i, j;
    for (int k = 0; k < na; k++) va.push_back($urandom % range);
    for (int k = 0; k < nb; k++) vb.push_back($urandom % range);
    va.sort(); vb.sort();
    for (int k = 0; k < na; k++) mem0.mem_write(a_base + addr_t'(k), {32'(k), va[k]});
    for (int k = 0; k < nb; k++) mem0.mem_write(b_base + addr_t'(k), {32'(k), vb[k]});
    i = 0; j = 0;
    while (i < na || j < nb) begin
      if (j == nb || (i < na && va[i] <= vb[j])) begin from_a.push_back(1'b1); i++; end
      else begin from_a.push_back(1'b0); j++; end
    end
    @(negedge clk);
    a_len = idx_t'(na); b_len = idx_t'(nb);
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    for (int k = 0; k <= NM; k++) begin
      int d, ca;
      d = (k * (na + nb)) / NM;
      ca = 0;
      for (int t = 0; t < d; t++) ca += from_a[t];
      check(a_split[k] == idx_t'(ca) && b_split[k] == idx_t'(d - ca),
            $sformatf("split %0d: a=%0d b=%0d expected a=%0d b=%0d", k, a_split[k], b_split[k], ca, d - ca));
    end
  endtask

  initial begin
    a_len = '0; b_len = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    one(1000, 100, 50);
    one(37, 300, 1000);
    one(0, 64, 10);
    one(64, 0, 10);
    one(500, 500, 3);
    one(5, 3, 100);
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
