// Shares one external-memory channel among many stream clients.
//
// The paper's board has two DDR3 channels, and the mergers, probers and
// the other units of both engines all read and write external memory; how
// they share it is not described. This arbiter is this design's choice:
// NR read clients and NW write clients, each side granted round-robin, one
// request per cycle to the channel. The channel answers reads in order
// and without back-pressure, so the arbiter remembers the client of every
// read in flight in a tag FIFO of MAX_OUT entries and steers each answer
// back to that client; it stops granting reads while the FIFO is full.
//
// Ports are flat arrays indexed by client number. A client's request is
// taken in the cycle its valid and ready are both high. The read data goes
// to all read clients unchanged; only the answer valid is steered.
module mem_arbiter
  import bisort_pkg::*;
#(
  parameter int NR      = 4,
  parameter int NW      = 2,
  parameter int MAX_OUT = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  // read clients
  input  logic  c_rd_req_valid [NR],
  output logic  c_rd_req_ready [NR],
  input  addr_t c_rd_req_addr  [NR],
  output logic  c_rd_rsp_valid [NR],
  output word_t c_rd_rsp_data  [NR],
  // write clients
  input  logic  c_wr_valid [NW],
  output logic  c_wr_ready [NW],
  input  addr_t c_wr_addr  [NW],
  input  word_t c_wr_data  [NW],
  // channel
  output logic  m_rd_req_valid,
  input  logic  m_rd_req_ready,
  output addr_t m_rd_req_addr,
  input  logic  m_rd_rsp_valid,
  input  word_t m_rd_rsp_data,
  output logic  m_wr_valid,
  input  logic  m_wr_ready,
  output addr_t m_wr_addr,
  output word_t m_wr_data
);
  localparam int RW = NR > 1 ? $clog2(NR) : 1;
  localparam int WW = NW > 1 ? $clog2(NW) : 1;
  localparam int TW = $clog2(MAX_OUT);

  logic [RW-1:0] rptr, rsel, tag_out;
  logic [WW-1:0] wptr, wsel;
  logic          rany, wany, tag_full, rfire;
  logic [TW:0]   tag_cnt;

  // round-robin choice: first requester at or after the pointer
  always_comb begin
    rany = 1'b0; rsel = rptr;
    for (int i = 0; i < NR; i++) begin
      int c;
      c = int'(rptr) + i;
      if (c >= NR) c = c - NR;
      if (!rany && c_rd_req_valid[c]) begin rany = 1'b1; rsel = RW'(c); end
    end
    wany = 1'b0; wsel = wptr;
    for (int i = 0; i < NW; i++) begin
      int c;
      c = int'(wptr) + i;
      if (c >= NW) c = c - NW;
      if (!wany && c_wr_valid[c]) begin wany = 1'b1; wsel = WW'(c); end
    end
  end

  assign tag_full       = tag_cnt == (TW+1)'(MAX_OUT);
  assign m_rd_req_valid = rany && !tag_full;
  assign m_rd_req_addr  = c_rd_req_addr[rsel];
  assign rfire          = m_rd_req_valid && m_rd_req_ready;
  assign m_wr_valid     = wany;
  assign m_wr_addr      = c_wr_addr[wsel];
  assign m_wr_data      = c_wr_data[wsel];

  always_comb begin
    for (int i = 0; i < NR; i++) begin
      c_rd_req_ready[i] = rfire && rsel == RW'(i);
      c_rd_rsp_valid[i] = m_rd_rsp_valid && tag_out == RW'(i);
      c_rd_rsp_data[i]  = m_rd_rsp_data;
    end
    for (int i = 0; i < NW; i++) c_wr_ready[i] = m_wr_ready && wany && wsel == WW'(i);
  end

  sync_fifo #(.W(RW), .DEPTH(MAX_OUT)) u_tags (
    .clk, .rst_n, .clear(1'b0), .push(rfire), .wr_data(rsel),
    .pop(m_rd_rsp_valid), .rd_data(tag_out), .count(tag_cnt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr <= '0; wptr <= '0;
    end else begin
      if (rfire) rptr <= (int'(rsel) == NR - 1) ? '0 : rsel + 1'b1;
      if (m_wr_valid && m_wr_ready) wptr <= (int'(wsel) == NW - 1) ? '0 : wsel + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) m_rd_rsp_valid |-> tag_cnt != '0)
    else $error("mem_arbiter: read answer with no read in flight");
endmodule
