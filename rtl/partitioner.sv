// Partitioner of the probing engine: finds the target partition of each
// bound with the rebounding binary search (Fig. 6 of the paper).
//
// It reads the bound array as a stream, takes the lower or the upper half of
// each word (input `upper`), and searches the on-chip index array for the
// last partition whose first value is below the bound (for upper bounds:
// not above it). The first tuple the prober is looking for can then not lie
// before that partition's start. Because the batch is sorted, each search
// starts at the partition found for the previous bound: in the forward
// phase the step doubles after every index entry that is still below the
// bound; at the first entry that is not (or past the end of the index) the
// backward phase halves the remaining interval, as in a binary search.
// The result written to the target array is the start position of the
// partition in the main array, one word per bound.
// Its upper 32 bits are zero.
//
// Timing: one index RAM read per search step, each taking two cycles
// (address, then registered data); about 2*log2(distance) steps per bound.
module partitioner
  import bisort_pkg::*;
#(
  parameter int LOG2P = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             upper,       // 1: use upper bounds, compare "<="
  input  addr_t            bound_base,
  input  idx_t             len,
  input  addr_t            tgt_base,
  output logic             busy,
  output logic             done,
  // read port (bound array)
  output logic             req_valid,
  input  logic             req_ready,
  output addr_t            req_addr,
  input  logic             rsp_valid,
  input  word_t            rsp_data,
  // index RAM read port
  output logic [LOG2P-1:0] iaddr,
  input  idx_t             ipos,
  input  val_t             ival,
  // write port (target array)
  output logic             wr_valid,
  input  logic             wr_ready,
  output addr_t            wr_addr,
  output word_t            wr_data
);
  localparam int P = 1 << LOG2P;
  typedef enum logic [2:0] {S_IDLE, S_TAKE, S_FWD, S_FWD_W, S_BACK, S_BACK_A, S_BACK_W, S_WRITE} state_e;
  state_e state;

  logic  s_valid, s_ready, idle, upr;
  word_t s_data;
  idx_t  rem;
  addr_t waddr;
  val_t  v;
  logic [LOG2P:0] q, hi, step, probe;
  idx_t  q_pos;
  logic  below;

  stream_reader #(.DEPTH(4)) u_rd (
    .clk, .rst_n, .start, .base(bound_base), .len,
    .req_valid, .req_ready, .req_addr, .rsp_valid, .rsp_data,
    .s_valid, .s_ready, .s_data, .idle
  );

  assign s_ready  = state == S_TAKE && s_valid;
  assign iaddr    = probe[LOG2P-1:0];
  assign below    = upr ? ival <= v : ival < v;
  assign wr_valid = state == S_WRITE;
  assign wr_addr  = waddr;
  assign wr_data  = word_t'(q_pos);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0; rem <= '0; waddr <= '0;
      v <= '0; q <= '0; hi <= '0; step <= '0; probe <= '0; q_pos <= '0; upr <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          upr <= upper; rem <= len; waddr <= tgt_base;
          q <= '0; q_pos <= '0;
          busy  <= len != '0;
          done  <= len == '0;
          state <= len != '0 ? S_TAKE : S_IDLE;
        end
        S_TAKE: if (s_valid) begin
          v     <= upr ? s_data[2*VAL_W-1:VAL_W] : s_data[VAL_W-1:0];
          step  <= 1;
          probe <= q + 1'b1;
          state <= S_FWD;
        end
        S_FWD: begin                      // forward phase: address presented
          if (probe >= (LOG2P+1)'(P)) begin
            hi    <= (LOG2P+1)'(P);
            state <= S_BACK;
          end else state <= S_FWD_W;
        end
        S_FWD_W: begin                    // index entry `probe` is on ival
          if (below) begin
            q     <= probe;
            q_pos <= ipos;
            step  <= step << 1;
            probe <= probe + (step << 1);
            state <= S_FWD;
          end else begin
            hi    <= probe;
            state <= S_BACK;
          end
        end
        S_BACK: begin                     // backward phase: halve (q, hi)
          if (hi - q <= 1) state <= S_WRITE;
          else begin
            probe <= (q + hi) >> 1;
            state <= S_BACK_A;
          end
        end
        S_BACK_A: state <= S_BACK_W;      // address of the middle entry presented
        S_BACK_W: begin                   // middle entry is on ival
          if (below) begin
            q     <= probe;
            q_pos <= ipos;
          end else hi <= probe;
          state <= S_BACK;
        end
        S_WRITE: if (wr_ready) begin
          waddr <= waddr + 1'b1;
          rem   <= rem - 1'b1;
          if (rem == idx_t'(1)) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_TAKE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
