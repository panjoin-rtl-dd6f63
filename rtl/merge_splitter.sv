// Splits one merge into NM equal pieces, one per merger.
//
// The paper runs BI-Sort insertion on several mergers at once and says it
// "tries to balance the size of each piece of the partially merged main
// array"; it does not say how the pieces are found. This block uses the
// merge-path (co-rank) method: for the output position d_k = floor(k*(M+B)/NM)
// it finds by binary search how many of the first d_k merged tuples come
// from the main array A (a_k) and how many from the batch B (b_k = d_k-a_k).
// Merger k then merges A[a_k, a_{k+1}) with B[b_k, b_{k+1}) into output
// positions [d_k, d_{k+1}), so every merger writes the same number of tuples
// (to within one) and their outputs simply abut.
//
// Tie rule: an A tuple goes before a B tuple of equal value, the same rule
// the merger's "<" comparator gives. Each search step reads A[mid] and
// B[d-mid-1] through the single read port, one request at a time; about
// log2(M) steps per split point, NM-1 split points. `done` pulses when
// a_split/b_split are valid (index 0 is 0, index NM is the full length).
module merge_splitter
  import bisort_pkg::*;
#(
  parameter int NM = 8   // number of mergers, a power of two
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t a_base,
  input  idx_t  a_len,
  input  addr_t b_base,
  input  idx_t  b_len,
  output idx_t  a_split [NM+1],
  output idx_t  b_split [NM+1],
  output logic  done,
  // read port
  output logic  req_valid,
  input  logic  req_ready,
  output addr_t req_addr,
  input  logic  rsp_valid,
  input  word_t rsp_data
);
  localparam int LNM = $clog2(NM);
  typedef enum logic [2:0] {S_IDLE, S_POINT, S_STEP, S_REQ_A, S_WAIT_A, S_REQ_B, S_WAIT_B} state_e;
  state_e state;

  logic [IDX_W+LNM:0] acc;      // k*(M+B)
  idx_t  d, lo, hi, mid;
  val_t  a_val;
  logic [LNM:0] k;

  assign mid = (lo + hi) >> 1;
  assign req_valid = state == S_REQ_A || state == S_REQ_B;
  assign req_addr  = state == S_REQ_A ? a_base + addr_t'(mid)
                                      : b_base + addr_t'(d - mid - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; acc <= '0; d <= '0; lo <= '0; hi <= '0;
      a_val <= '0; k <= '0;
      for (int i = 0; i <= NM; i++) begin a_split[i] <= '0; b_split[i] <= '0; end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          a_split[0]  <= '0;    b_split[0]  <= '0;
          a_split[NM] <= a_len; b_split[NM] <= b_len;
          acc   <= '0;
          k     <= 1;
          state <= NM > 1 ? S_POINT : S_IDLE;
          done  <= NM == 1;
        end
        S_POINT: begin          // next split point d_k
          logic [IDX_W+LNM:0] nacc;
          idx_t nd;
          nacc = acc + (IDX_W+LNM+1)'(a_len) + (IDX_W+LNM+1)'(b_len);
          nd   = idx_t'(nacc >> LNM);
          acc  <= nacc;
          d    <= nd;
          lo   <= nd > b_len ? nd - b_len : '0;
          hi   <= nd < a_len ? nd : a_len;
          state <= S_STEP;
        end
        S_STEP: begin
          if (lo == hi) begin
            a_split[k] <= lo;
            b_split[k] <= d - lo;
            if (k == (LNM+1)'(NM - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              k     <= k + 1'b1;
              state <= S_POINT;
            end
          end else state <= S_REQ_A;
        end
        S_REQ_A:  if (req_ready) state <= S_WAIT_A;
        S_WAIT_A: if (rsp_valid) begin a_val <= val_of(rsp_data); state <= S_REQ_B; end
        S_REQ_B:  if (req_ready) state <= S_WAIT_B;
        S_WAIT_B: if (rsp_valid) begin
          // A[mid] <= B[d-mid-1]: A[mid] is among the first d outputs
          if (a_val <= val_of(rsp_data)) lo <= mid + 1'b1;
          else                           hi <= mid;
          state <= S_STEP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
