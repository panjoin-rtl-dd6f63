// Test of the memory-channel arbiter: 5 read clients and 3 write clients
// issue random requests at random times into one stalling channel. Each
// read must come back to the client that made it, in that client's order,
// with the word at that address (memory is preloaded with a function of
// the address); each write, to an address of its own, must land. Also checks that no client waits
// more than a bounded time while requesting (round-robin fairness).
module tb_mem_arbiter;
  import bisort_pkg::*;
  localparam int NR = 5, NW = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  c_rd_req_valid [NR], c_rd_req_ready [NR], c_rd_rsp_valid [NR];
  addr_t c_rd_req_addr [NR];
  word_t c_rd_rsp_data [NR];
  logic  c_wr_valid [NW], c_wr_ready [NW];
  addr_t c_wr_addr [NW];
  word_t c_wr_data [NW];
  logic  mrv [1], mrr [1], msv [1], mwv [1], mwr [1];
  addr_t mra [1], mwa [1];
  word_t msd [1], mwd [1];
  int checks = 0, failures = 0;
  addr_t pend [NR][$];
  int    wait_c [NR];
  int    nread [NR];
  word_t wexp [addr_t];
  int    wnext = 0;

  mem_arbiter #(.NR(NR), .NW(NW), .MAX_OUT(8)) dut (
    .clk, .rst_n, .c_rd_req_valid, .c_rd_req_ready, .c_rd_req_addr, .c_rd_rsp_valid, .c_rd_rsp_data,
    .c_wr_valid, .c_wr_ready, .c_wr_addr, .c_wr_data,
    .m_rd_req_valid(mrv[0]), .m_rd_req_ready(mrr[0]), .m_rd_req_addr(mra[0]),
    .m_rd_rsp_valid(msv[0]), .m_rd_rsp_data(msd[0]),
    .m_wr_valid(mwv[0]), .m_wr_ready(mwr[0]), .m_wr_addr(mwa[0]), .m_wr_data(mwd[0]));
  ddr3_model #(.NR(1), .NW(1), .LAT(5), .STALL(25)) mem0 (
    .clk, .rd_req_valid(mrv), .rd_req_ready(mrr), .rd_req_addr(mra), .rd_rsp_valid(msv),
    .rd_rsp_data(msd), .wr_valid(mwv), .wr_ready(mwr), .wr_addr(mwa), .wr_data(mwd));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic word_t pattern(addr_t a);
    return {~32'(a), 32'(a) * 32'd2654435761};
  endfunction

  initial begin
    for (int a = 0; a < 4096; a++) mem0.mem_write(addr_t'(a), pattern(addr_t'(a)));
    for (int i = 0; i < NR; i++) begin c_rd_req_valid[i] = 0; c_rd_req_addr[i] = 0; wait_c[i] = 0; nread[i] = 0; end
    for (int i = 0; i < NW; i++) begin c_wr_valid[i] = 0; c_wr_addr[i] = 0; c_wr_data[i] = 0; end
    // reset held longer than the memory latency, so reads issued by
    // not-yet-reset logic are answered before reset is released
    repeat (32) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // clients whose request was taken at the last edge choose anew
      for (int i = 0; i < NR; i++)
        if (!c_rd_req_valid[i] && ($urandom % 3 == 0) && cyc < 2900) begin
          c_rd_req_valid[i] = 1; c_rd_req_addr[i] = addr_t'($urandom % 4096);
        end
      for (int i = 0; i < NW; i++)
        if (!c_wr_valid[i] && ($urandom % 4 == 0) && cyc < 2900) begin
          c_wr_valid[i] = 1; c_wr_addr[i] = addr_t'(8192 + wnext); wnext++;
          c_wr_data[i] = {32'(i), 32'($urandom)};
        end
      @(posedge clk);
      #1;
    end
    repeat (50) @(posedge clk);
    check(wexp.size() > 200, "too few writes");
    foreach (wexp[a]) check(mem0.mem_read(a) == wexp[a], $sformatf("write to %0d lost", a));
    for (int i = 0; i < NR; i++) begin
      check(pend[i].size() == 0, $sformatf("client %0d: %0d reads never answered", i, pend[i].size()));
      check(nread[i] > 100, $sformatf("client %0d served only %0d reads", i, nread[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observe at each edge: requests taken, answers, writes
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NR; i++) begin
      if (c_rd_rsp_valid[i]) begin
        check(pend[i].size() > 0, $sformatf("client %0d: answer with nothing pending", i));
        if (pend[i].size() > 0) begin
          addr_t a;
          a = pend[i].pop_front();
          check(c_rd_rsp_data[i] == pattern(a), $sformatf("client %0d: wrong data for %0d", i, a));
          nread[i]++;
        end
      end
      if (c_rd_req_valid[i] && c_rd_req_ready[i]) begin
        pend[i].push_back(c_rd_req_addr[i]);
        c_rd_req_valid[i] <= 0;
        wait_c[i] = 0;
      end else if (c_rd_req_valid[i]) begin
        wait_c[i]++;
        if (wait_c[i] == 60) check(0, $sformatf("client %0d starved", i));
      end
    end
    for (int i = 0; i < NW; i++)
      if (c_wr_valid[i] && c_wr_ready[i]) begin
        wexp[c_wr_addr[i]] = c_wr_data[i];
        c_wr_valid[i] <= 0;
      end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
