// Turns a run of consecutive memory words into a valid/ready stream.
//
// This is the "Buffer" in front of each comparator of the merger and prober:
// the paper implements continuous memory access as a data stream. A `start`
// pulse loads the first word address and the word count; the reader then
// issues one read request per cycle while its buffer has room for every
// request still in flight, so the memory may answer with any fixed or
// variable latency as long as it answers in order and never stalls an
// answer. A `start` while a run is active abandons it: the buffer is emptied
// and answers to requests already issued are dropped when they arrive.
//
// Read port: req_valid/req_ready/req_addr; rsp_valid/rsp_data (in order,
// no back-pressure). Stream port: s_valid/s_ready/s_data. `idle` is high
// when nothing is left to request and nothing is in flight.
module stream_reader
  import bisort_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t base,
  input  idx_t  len,
  // memory read port
  output logic  req_valid,
  input  logic  req_ready,
  output addr_t req_addr,
  input  logic  rsp_valid,
  input  word_t rsp_data,
  // output stream
  output logic  s_valid,
  input  logic  s_ready,
  output word_t s_data,
  output logic  idle
);
  localparam int CW = $clog2(DEPTH) + 1;
  logic [CW-1:0] count;
  logic [CW:0]   inflight, discard;
  idx_t          rem;
  addr_t         addr;
  logic          issue, push, pop;

  assign req_valid = !start && rem != '0 && (32'(inflight) + 32'(count)) < DEPTH;
  assign req_addr  = addr;
  assign issue     = req_valid && req_ready;
  assign push      = rsp_valid && discard == '0 && !start;
  assign s_valid   = count != '0;
  assign pop       = s_valid && s_ready && !start;
  assign idle      = rem == '0 && inflight == '0;

  sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .clear(start), .push, .wr_data(rsp_data), .pop,
    .rd_data(s_data), .count
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight <= '0; discard <= '0; rem <= '0; addr <= '0;
    end else begin
      inflight <= inflight + (CW+1)'(issue) - (CW+1)'(rsp_valid);
      if (start) begin
        rem     <= len;
        addr    <= base;
        discard <= inflight - (CW+1)'(rsp_valid);
      end else begin
        if (rsp_valid && discard != '0) discard <= discard - 1'b1;
        if (issue) begin
          rem  <= rem - 1'b1;
          addr <= addr + 1'b1;
        end
      end
    end
  end
endmodule
