// Test of the index RAM: random writes kept in a shadow array here, random
// reads on both ports checked one cycle after the address is given
// (registered read), including a read of an entry written the cycle before.
module tb_index_ram;
  import bisort_pkg::*;
  localparam int LOG2P = 6, P = 1 << LOG2P;
  logic clk = 1'b0;
  always #5 clk = !clk;

  logic we = 1'b0;
  logic [LOG2P-1:0] waddr = '0, raddr0 = '0, raddr1 = '0;
  idx_t wpos = '0, rpos0, rpos1;
  val_t wval = '0, rval0, rval1;
  idx_t shp [P];
  val_t shv [P];
  int checks = 0, failures = 0;

  index_ram #(.LOG2P(LOG2P)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    @(negedge clk);
    for (int p = 0; p < P; p++) begin
      we = 1'b1; waddr = LOG2P'(p); wpos = $urandom; wval = $urandom;
      shp[p] = wpos; shv[p] = wval;
      @(negedge clk);
    end
    we = 1'b0;
    for (int t = 0; t < 500; t++) begin
      logic [LOG2P-1:0] a0, a1;
      a0 = LOG2P'($urandom); a1 = LOG2P'($urandom);
      raddr0 = a0; raddr1 = a1;
      if (t % 7 == 0) begin
        we = 1'b1; waddr = LOG2P'($urandom); wpos = $urandom; wval = $urandom;
      end else we = 1'b0;
      @(negedge clk);
      check(rpos0 == shp[a0] && rval0 == shv[a0], $sformatf("port 0 entry %0d", a0));
      check(rpos1 == shp[a1] && rval1 == shv[a1], $sformatf("port 1 entry %0d", a1));
      if (we) begin shp[waddr] = wpos; shv[waddr] = wval; end
    end
    we = 1'b0;
    // read-after-write: entry written in the previous cycle
    we = 1'b1; waddr = 3; wpos = 32'h1234; wval = 32'h5678; @(negedge clk);
    we = 1'b0; raddr0 = 3; raddr1 = 3; @(negedge clk);
    check(rpos0 == 32'h1234 && rval1 == 32'h5678, "read after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
