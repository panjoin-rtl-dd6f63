// Test of the partitioner: an index is built here from a random sorted
// main array (entry p: position floor(p*M/P) and its value) and held in a
// registered-read array like the index RAM. For sorted bound batches the
// target written for each bound must be the start position of the last
// partition whose first value is below the bound (lower bounds) or not
// above it (upper bounds), or 0 if there is none; found by linear search
// here. Value ranges are chosen so that bounds land before, inside and past
// the end of the index.
module tb_partitioner;
  import bisort_pkg::*;
  localparam int LOG2P = 5, P = 1 << LOG2P;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  start = 1'b0, upper = 1'b0, busy, done;
  addr_t bound_base = 100, tgt_base = 7000;
  idx_t  len;
  logic [LOG2P-1:0] iaddr;
  idx_t  ipos;
  val_t  ival;
  idx_t  ix_pos [P];
  val_t  ix_val [P];
  logic  rv [1], rr [1], sv [1];
  addr_t ra [1];
  word_t sd [1];
  logic  wv [1], wr [1];
  addr_t wa [1];
  word_t wd [1];
  int checks = 0, failures = 0;

  always @(posedge clk) begin ipos <= ix_pos[iaddr]; ival <= ix_val[iaddr]; end

  partitioner #(.LOG2P(LOG2P)) dut (
    .clk, .rst_n, .start, .upper, .bound_base, .len, .tgt_base, .busy, .done,
    .req_valid(rv[0]), .req_ready(rr[0]), .req_addr(ra[0]), .rsp_valid(sv[0]), .rsp_data(sd[0]),
    .iaddr, .ipos, .ival,
    .wr_valid(wv[0]), .wr_ready(wr[0]), .wr_addr(wa[0]), .wr_data(wd[0]));
  ddr3_model #(.NR(1), .NW(1), .LAT(3), .STALL(20)) mem0 (
    .clk, .rd_req_valid(rv), .rd_req_ready(rr), .rd_req_addr(ra), .rd_rsp_valid(sv),
    .rd_rsp_data(sd), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic one(int m, int n, int unsigned range, int unsigned e, bit up);
    int unsigned mv[$], bv[$];
    for (int k = 0; k < m; k++) mv.push_back($urandom % range);
    mv.sort();
    for (int p = 0; p < P; p++) begin
      ix_pos[p] = idx_t'((p * m) / P);
      ix_val[p] = mv[(p * m) / P];
    end
    for (int k = 0; k < n; k++) bv.push_back($urandom % (range + range / 4));
    bv.sort();
    for (int k = 0; k < n; k++) begin
      longint lo, hi;
      lo = longint'(bv[k]) - longint'(e); if (lo < 0) lo = 0;
      hi = longint'(bv[k]) + longint'(e);
      mem0.mem_write(bound_base + addr_t'(k), {32'(hi), 32'(lo)});
    end
    @(negedge clk);
    len = idx_t'(n); upper = up;
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    for (int k = 0; k < n; k++) begin
      word_t w; val_t b; idx_t exp_pos;
      w = mem0.mem_read(bound_base + addr_t'(k));
      b = up ? w[63:32] : w[31:0];
      exp_pos = 0;
      for (int p = 0; p < P; p++)
        if (up ? ix_val[p] <= b : ix_val[p] < b) exp_pos = ix_pos[p];
      check(mem0.mem_read(tgt_base + addr_t'(k)) == word_t'(exp_pos),
            $sformatf("bound %0d (%0d, upper %0d): target %0d expected %0d", k, b, up,
                      mem0.mem_read(tgt_base + addr_t'(k)), exp_pos));
    end
  endtask

  initial begin
    len = '0;
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    one(500, 100, 10000, 20, 1'b0);
    one(500, 100, 10000, 20, 1'b1);
    one(500, 60, 40, 0, 1'b0);     // many duplicate values
    one(500, 60, 40, 0, 1'b1);
    one(20, 40, 1000, 5, 1'b0);    // M < P: repeated positions
    one(3000, 5, 1000000, 0, 1'b1);
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
