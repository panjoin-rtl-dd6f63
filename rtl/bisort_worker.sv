// BI-Sort worker node: one stream-join subwindow on an FPGA with external
// memory (Fig. 7 of the paper).
//
// The subwindow keeps its tuples as one array sorted by join value (the
// main array) in external memory, plus an on-chip index that samples every
// (M/P)-th tuple. The manager node sends commands:
//   CREATE / EXPIRE  empty the subwindow (expiration drops a subwindow as
//                    a whole, never single tuples);
//   INSERT           merge a sorted batch, already in memory, into the main
//                    array (insertion engine) and rebuild the index;
//   PROBE            answer a sorted batch with one <id_start, id_end>
//                    record per tuple for the band [v-eps, v+eps]
//                    (probing engine); eps = 0 is the equi-join.
// The worker reports whether its subwindow is empty and whether it is full
// (M >= N_SUB), the two status bits the paper says the manager needs.
//
// The main array lives in two regions, MAIN0_BASE and MAIN1_BASE; each
// insertion reads one and writes the other. Batches, probe scratch space
// and results are where the command says. Every engine port goes through
// two mem_arbiters, one per memory channel (the board has two DDR3
// channels); client i uses channel i mod 2. The memory itself, the host and
// network I/O that fill it, and the manager node are outside this module:
// the DDR3 channels are plain ports here, and commands arrive on a
// valid/ready port. One command runs at a time; `done` pulses at its end.
//
// Defaults follow the paper's FPGA configuration: 8 mergers, 8 probers,
// P = 64K partitions, subwindows of 8M tuples.
module bisort_worker
  import bisort_pkg::*;
#(
  parameter int    N_SUB      = 8 * 1024 * 1024,
  parameter int    NM         = 8,
  parameter int    NPR        = 8,
  parameter int    LOG2P      = 16,
  parameter int    BUF_DEPTH  = 8,
  parameter int    MAX_OUT    = 64,
  parameter addr_t MAIN0_BASE = addr_t'(0),
  parameter addr_t MAIN1_BASE = addr_t'(N_SUB)
) (
  input  logic  clk,
  input  logic  rst_n,
  // commands from the manager node
  input  logic  cmd_valid,
  output logic  cmd_ready,
  input  cmd_t  cmd,
  output logic  done,
  // running status
  output idx_t  sub_len,
  output logic  sub_empty,
  output logic  sub_full,
  output addr_t main_base,
  output logic  [NPR-1:0] prober_seek,
  // two external memory channels
  output logic  ddr_rd_req_valid [2],
  input  logic  ddr_rd_req_ready [2],
  output addr_t ddr_rd_req_addr  [2],
  input  logic  ddr_rd_rsp_valid [2],
  input  word_t ddr_rd_rsp_data  [2],
  output logic  ddr_wr_valid [2],
  input  logic  ddr_wr_ready [2],
  output addr_t ddr_wr_addr  [2],
  output word_t ddr_wr_data  [2]
);
  localparam int NR_I = 2 * NM + 2;
  localparam int NW_I = NM;
  localparam int NR_P = 3 + 3 * NPR;
  localparam int NW_P = 3 + NPR;
  localparam int NR   = NR_I + NR_P;
  localparam int NW   = NW_I + NW_P;
  localparam int NR0  = (NR + 1) / 2, NR1 = NR / 2;
  localparam int NW0  = (NW + 1) / 2, NW1 = NW / 2;

  typedef enum logic [1:0] {S_IDLE, S_INSERT, S_PROBE} state_e;
  state_e state;

  logic  sel;
  idx_t  m;
  logic  ins_start, ins_done, ins_busy, prb_start, prb_done, prb_busy;

  // all clients, insertion engine first
  logic  rd_req_valid [NR];
  logic  rd_req_ready [NR];
  addr_t rd_req_addr  [NR];
  logic  rd_rsp_valid [NR];
  word_t rd_rsp_data  [NR];
  logic  wr_valid [NW];
  logic  wr_ready [NW];
  addr_t wr_addr  [NW];
  word_t wr_data  [NW];

  // index RAM
  logic             idx_we;
  logic [LOG2P-1:0] idx_waddr;
  idx_t             idx_wpos;
  val_t             idx_wval;
  logic [LOG2P-1:0] iaddr [2];
  idx_t             ipos  [2];
  val_t             ival  [2];

  assign main_base = sel ? MAIN1_BASE : MAIN0_BASE;
  assign sub_len   = m;
  assign sub_empty = m == '0;
  assign sub_full  = m >= idx_t'(N_SUB);
  assign cmd_ready = state == S_IDLE;
  assign ins_start = cmd_valid && cmd_ready && cmd.op == OP_INSERT;
  assign prb_start = cmd_valid && cmd_ready && cmd.op == OP_PROBE;

  insertion_engine #(.NM(NM), .LOG2P(LOG2P), .BUF_DEPTH(BUF_DEPTH)) u_ins (
    .clk, .rst_n, .start(ins_start),
    .main_base, .main_len(m), .batch_base(cmd.batch_addr), .batch_len(cmd.batch_len),
    .out_base(sel ? MAIN0_BASE : MAIN1_BASE),
    .busy(ins_busy), .done(ins_done),
    .rd_req_valid(rd_req_valid[0:NR_I-1]), .rd_req_ready(rd_req_ready[0:NR_I-1]),
    .rd_req_addr(rd_req_addr[0:NR_I-1]), .rd_rsp_valid(rd_rsp_valid[0:NR_I-1]),
    .rd_rsp_data(rd_rsp_data[0:NR_I-1]),
    .wr_valid(wr_valid[0:NW_I-1]), .wr_ready(wr_ready[0:NW_I-1]),
    .wr_addr(wr_addr[0:NW_I-1]), .wr_data(wr_data[0:NW_I-1]),
    .idx_we, .idx_waddr, .idx_wpos, .idx_wval
  );

  probing_engine #(.NPR(NPR), .LOG2P(LOG2P), .BUF_DEPTH(BUF_DEPTH)) u_prb (
    .clk, .rst_n, .start(prb_start),
    .main_base, .main_len(m), .batch_base(cmd.batch_addr), .batch_len(cmd.batch_len),
    .eps(cmd.eps), .scratch_base(cmd.scratch_addr), .res_base(cmd.res_addr),
    .busy(prb_busy), .done(prb_done), .seek(prober_seek),
    .rd_req_valid(rd_req_valid[NR_I:NR-1]), .rd_req_ready(rd_req_ready[NR_I:NR-1]),
    .rd_req_addr(rd_req_addr[NR_I:NR-1]), .rd_rsp_valid(rd_rsp_valid[NR_I:NR-1]),
    .rd_rsp_data(rd_rsp_data[NR_I:NR-1]),
    .wr_valid(wr_valid[NW_I:NW-1]), .wr_ready(wr_ready[NW_I:NW-1]),
    .wr_addr(wr_addr[NW_I:NW-1]), .wr_data(wr_data[NW_I:NW-1]),
    .iaddr, .ipos, .ival
  );

  index_ram #(.LOG2P(LOG2P)) u_index (
    .clk, .we(idx_we), .waddr(idx_waddr), .wpos(idx_wpos), .wval(idx_wval),
    .raddr0(iaddr[0]), .rpos0(ipos[0]), .rval0(ival[0]),
    .raddr1(iaddr[1]), .rpos1(ipos[1]), .rval1(ival[1])
  );

  // channel c serves clients c, c+2, c+4, ...
  logic  c0_rd_req_valid [NR0], c0_rd_req_ready [NR0], c0_rd_rsp_valid [NR0];
  addr_t c0_rd_req_addr  [NR0];
  word_t c0_rd_rsp_data  [NR0];
  logic  c1_rd_req_valid [NR1], c1_rd_req_ready [NR1], c1_rd_rsp_valid [NR1];
  addr_t c1_rd_req_addr  [NR1];
  word_t c1_rd_rsp_data  [NR1];
  logic  c0_wr_valid [NW0], c0_wr_ready [NW0];
  addr_t c0_wr_addr  [NW0];
  word_t c0_wr_data  [NW0];
  logic  c1_wr_valid [NW1], c1_wr_ready [NW1];
  addr_t c1_wr_addr  [NW1];
  word_t c1_wr_data  [NW1];

  always_comb begin
    for (int i = 0; i < NR; i++) begin
      if (i % 2 == 0) begin
        c0_rd_req_valid[i/2] = rd_req_valid[i];
        c0_rd_req_addr[i/2]  = rd_req_addr[i];
        rd_req_ready[i]      = c0_rd_req_ready[i/2];
        rd_rsp_valid[i]      = c0_rd_rsp_valid[i/2];
        rd_rsp_data[i]       = c0_rd_rsp_data[i/2];
      end else begin
        c1_rd_req_valid[i/2] = rd_req_valid[i];
        c1_rd_req_addr[i/2]  = rd_req_addr[i];
        rd_req_ready[i]      = c1_rd_req_ready[i/2];
        rd_rsp_valid[i]      = c1_rd_rsp_valid[i/2];
        rd_rsp_data[i]       = c1_rd_rsp_data[i/2];
      end
    end
    for (int i = 0; i < NW; i++) begin
      if (i % 2 == 0) begin
        c0_wr_valid[i/2] = wr_valid[i];
        c0_wr_addr[i/2]  = wr_addr[i];
        c0_wr_data[i/2]  = wr_data[i];
        wr_ready[i]      = c0_wr_ready[i/2];
      end else begin
        c1_wr_valid[i/2] = wr_valid[i];
        c1_wr_addr[i/2]  = wr_addr[i];
        c1_wr_data[i/2]  = wr_data[i];
        wr_ready[i]      = c1_wr_ready[i/2];
      end
    end
  end

  mem_arbiter #(.NR(NR0), .NW(NW0), .MAX_OUT(MAX_OUT)) u_arb0 (
    .clk, .rst_n,
    .c_rd_req_valid(c0_rd_req_valid), .c_rd_req_ready(c0_rd_req_ready),
    .c_rd_req_addr(c0_rd_req_addr), .c_rd_rsp_valid(c0_rd_rsp_valid), .c_rd_rsp_data(c0_rd_rsp_data),
    .c_wr_valid(c0_wr_valid), .c_wr_ready(c0_wr_ready), .c_wr_addr(c0_wr_addr), .c_wr_data(c0_wr_data),
    .m_rd_req_valid(ddr_rd_req_valid[0]), .m_rd_req_ready(ddr_rd_req_ready[0]),
    .m_rd_req_addr(ddr_rd_req_addr[0]), .m_rd_rsp_valid(ddr_rd_rsp_valid[0]),
    .m_rd_rsp_data(ddr_rd_rsp_data[0]),
    .m_wr_valid(ddr_wr_valid[0]), .m_wr_ready(ddr_wr_ready[0]),
    .m_wr_addr(ddr_wr_addr[0]), .m_wr_data(ddr_wr_data[0])
  );
  mem_arbiter #(.NR(NR1), .NW(NW1), .MAX_OUT(MAX_OUT)) u_arb1 (
    .clk, .rst_n,
    .c_rd_req_valid(c1_rd_req_valid), .c_rd_req_ready(c1_rd_req_ready),
    .c_rd_req_addr(c1_rd_req_addr), .c_rd_rsp_valid(c1_rd_rsp_valid), .c_rd_rsp_data(c1_rd_rsp_data),
    .c_wr_valid(c1_wr_valid), .c_wr_ready(c1_wr_ready), .c_wr_addr(c1_wr_addr), .c_wr_data(c1_wr_data),
    .m_rd_req_valid(ddr_rd_req_valid[1]), .m_rd_req_ready(ddr_rd_req_ready[1]),
    .m_rd_req_addr(ddr_rd_req_addr[1]), .m_rd_rsp_valid(ddr_rd_rsp_valid[1]),
    .m_rd_rsp_data(ddr_rd_rsp_data[1]),
    .m_wr_valid(ddr_wr_valid[1]), .m_wr_ready(ddr_wr_ready[1]),
    .m_wr_addr(ddr_wr_addr[1]), .m_wr_data(ddr_wr_data[1])
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sel <= 1'b0; m <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          case (cmd.op)
            OP_CREATE, OP_EXPIRE: begin m <= '0; sel <= 1'b0; done <= 1'b1; end
            OP_INSERT: state <= S_INSERT;
            OP_PROBE:  state <= S_PROBE;
            default: ;
          endcase
        end
        S_INSERT: if (ins_done) begin
          m     <= m + u_ins.total - m;   // new length = old length + batch
          sel   <= !sel;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_PROBE: if (prb_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   ins_start |-> 33'(m) + 33'(cmd.batch_len) <= 33'(N_SUB))
    else $error("bisort_worker: insertion beyond the subwindow size");
endmodule
