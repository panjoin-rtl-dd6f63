// Test of the boundary generator: each bound word must be {v+eps, v-eps},
// saturated at 0 and at 2^32-1, for batches that include values near both
// ends of the range; equi-join (eps = 0) gives {v, v}. Also checks one word
// per cycle when memory never stalls.
module tb_boundary_generator;
  import bisort_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, busy, done;
  addr_t batch_base = 50, bound_base = 4000;
  idx_t  batch_len;
  val_t  eps;
  logic  rv [1], rr [1], sv [1];
  addr_t ra [1];
  word_t sd [1];
  logic  wv [1], wr [1];
  addr_t wa [1];
  word_t wd [1];
  int checks = 0, failures = 0;

  boundary_generator dut (
    .clk, .rst_n, .start, .batch_base, .batch_len, .eps, .bound_base, .busy, .done,
    .req_valid(rv[0]), .req_ready(rr[0]), .req_addr(ra[0]), .rsp_valid(sv[0]), .rsp_data(sd[0]),
    .wr_valid(wv[0]), .wr_ready(wr[0]), .wr_addr(wa[0]), .wr_data(wd[0]));
  ddr3_model #(.NR(1), .NW(1), .LAT(4), .STALL(0)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic one(int n, int unsigned e);
    int unsigned v[$];
    int cyc;
    for (int k = 0; k < n; k++)
      case ($urandom % 3)
        0: v.push_back($urandom % 1000);
        1: v.push_back(32'hffff_ffff - ($urandom % 1000));
        default: v.push_back($urandom);
      endcase
    v.sort();
    for (int k = 0; k < n; k++) mem0.mem_write(batch_base + addr_t'(k), {32'(k), v[k]});
    @(negedge clk);
    batch_len = idx_t'(n); eps = e;
    start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int k = 0; k < n; k++) begin
      longint lo, hi;
      lo = longint'(v[k]) - longint'(e); if (lo < 0) lo = 0;
      hi = longint'(v[k]) + longint'(e); if (hi > 64'hffff_ffff) hi = 64'hffff_ffff;
      check(mem0.mem_read(bound_base + addr_t'(k)) == {32'(hi), 32'(lo)},
            $sformatf("bound %0d of v=%0d eps=%0d: %h", k, v[k], e, mem0.mem_read(bound_base + addr_t'(k))));
    end
    check(cyc <= n + 12, $sformatf("%0d bounds took %0d cycles", n, cyc));
  endtask

  initial begin
    batch_len = '0; eps = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    one(200, 500); one(50, 0); one(30, 32'h7fff_ffff); one(0, 5);
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
