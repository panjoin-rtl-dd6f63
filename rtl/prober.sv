// Prober of the probing engine (Fig. 9 of the paper).
//
// A prober takes a run of sorted bounds (all lower or all upper bounds of a
// slice of the probe batch), the target partition start of each bound, and
// the sorted main array, and writes for each bound the index of the first
// main-array tuple that is at or above a lower bound, or strictly above an
// upper bound. Together, the pair of results for one probe tuple is the
// paper's <id_start, id_end> record: the matching tuples are main-array
// positions [id_start, id_end) (the end here is exclusive; an empty band
// gives id_start = id_end).
//
// Like a merger it compares two buffered streams, partition tuples and
// bounds. If the tuple meets the bound it writes the tuple's index i and
// takes the next bound, keeping the tuple (the next bound may be met by the
// same tuple); otherwise it takes the next tuple. The paper also lets a
// tuple that "exceeds" the bound end that bound; with the first-tuple-at-or-
// above formulation used here the two cases coincide. When a bound's target
// partition starts beyond the tuple at hand, the prober abandons its read-
// ahead and restarts the main-array stream at that partition; otherwise it
// keeps scanning, since the results of a sorted run of bounds never go
// backwards. A bound beyond every tuple gets the array length M.
// Each result is a position, written as a 64-bit word whose upper 32 bits
// are zero.
//
// Timing: one tuple compared per cycle while the stream keeps up; a seek
// costs the memory latency once; one result word written per bound.
module prober
  import bisort_pkg::*;
#(
  parameter int BUF_DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  upper,       // 1: bounds are upper bounds (strict compare)
  input  addr_t main_base,
  input  idx_t  main_len,
  input  addr_t bound_base,  // first bound word of this slice
  input  addr_t tgt_base,    // first target word of this slice
  input  idx_t  len,         // bounds in this slice
  input  addr_t res_base,    // first result word of this slice
  output logic  busy,
  output logic  done,
  output logic  seek,        // pulses when the main-array stream is restarted
  // read port: main array (partition tuples)
  output logic  m_req_valid,
  input  logic  m_req_ready,
  output addr_t m_req_addr,
  input  logic  m_rsp_valid,
  input  word_t m_rsp_data,
  // read port: bounds
  output logic  b_req_valid,
  input  logic  b_req_ready,
  output addr_t b_req_addr,
  input  logic  b_rsp_valid,
  input  word_t b_rsp_data,
  // read port: target partitions
  output logic  t_req_valid,
  input  logic  t_req_ready,
  output addr_t t_req_addr,
  input  logic  t_rsp_valid,
  input  word_t t_rsp_data,
  // write port: results
  output logic  wr_valid,
  input  logic  wr_ready,
  output addr_t wr_addr,
  output word_t wr_data
);
  typedef enum logic [2:0] {S_IDLE, S_NEXT, S_SEEK, S_SCAN, S_WRITE} state_e;
  state_e state;

  logic  m_valid, m_pop, m_idle, b_valid, b_pop, b_idle, t_valid, t_pop, t_idle;
  word_t m_data, b_data, t_data;
  logic  upr, started, m_start, meets;
  addr_t mbase, waddr;
  idx_t  m, rem, cur, result;
  val_t  bnd;

  assign m_start = state == S_SEEK;

  stream_reader #(.DEPTH(BUF_DEPTH)) u_rd_main (
    .clk, .rst_n, .start(m_start), .base(mbase + addr_t'(cur)), .len(m - cur),
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .s_valid(m_valid), .s_ready(m_pop), .s_data(m_data), .idle(m_idle)
  );
  stream_reader #(.DEPTH(4)) u_rd_bound (
    .clk, .rst_n, .start, .base(bound_base), .len,
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .rsp_valid(b_rsp_valid), .rsp_data(b_rsp_data),
    .s_valid(b_valid), .s_ready(b_pop), .s_data(b_data), .idle(b_idle)
  );
  stream_reader #(.DEPTH(4)) u_rd_tgt (
    .clk, .rst_n, .start, .base(tgt_base), .len,
    .req_valid(t_req_valid), .req_ready(t_req_ready), .req_addr(t_req_addr),
    .rsp_valid(t_rsp_valid), .rsp_data(t_rsp_data),
    .s_valid(t_valid), .s_ready(t_pop), .s_data(t_data), .idle(t_idle)
  );

  assign meets    = upr ? val_of(m_data) > bnd : val_of(m_data) >= bnd;
  assign b_pop    = state == S_NEXT && b_valid && t_valid;
  assign t_pop    = b_pop;
  assign m_pop    = state == S_SCAN && cur != m && m_valid && !meets;
  assign wr_valid = state == S_WRITE;
  assign wr_addr  = waddr;
  assign wr_data  = word_t'(result);
  assign seek     = m_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0; upr <= 1'b0; started <= 1'b0;
      mbase <= '0; waddr <= '0; m <= '0; rem <= '0; cur <= '0; result <= '0; bnd <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          upr <= upper; mbase <= main_base; m <= main_len; rem <= len;
          waddr <= res_base; cur <= '0; started <= 1'b0;
          busy  <= len != '0;
          done  <= len == '0;
          state <= len != '0 ? S_NEXT : S_IDLE;
        end
        S_NEXT: if (b_pop) begin
          idx_t s;
          s   = idx_t'(t_data);
          bnd <= upr ? b_data[2*VAL_W-1:VAL_W] : b_data[VAL_W-1:0];
          if (!started || s > cur) begin
            cur     <= (s > cur || !started) ? s : cur;
            started <= 1'b1;
            state   <= S_SEEK;
          end else state <= S_SCAN;
        end
        S_SEEK: state <= S_SCAN;           // stream restarted at `cur`
        S_SCAN: begin
          if (cur == m) begin
            result <= m;
            state  <= S_WRITE;
          end else if (m_valid) begin
            if (meets) begin
              result <= cur;
              state  <= S_WRITE;
            end else cur <= cur + 1'b1;
          end
        end
        S_WRITE: if (wr_ready) begin
          waddr <= waddr + 1'b1;
          rem   <= rem - 1'b1;
          if (rem == idx_t'(1)) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_NEXT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
