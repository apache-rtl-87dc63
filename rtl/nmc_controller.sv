// nmc_controller: interconnect controller of the NMC module.
//
// The host's scheduler sends operator instructions (apache_pkg::instr_t) into
// a QDEPTH-entry queue.  The controller configures the NMC core and runs each
// instruction on one of three sequencers, which work at the same time:
//   routine 1 (OP_R1): one row per cycle through (I)NTT -> MMult -> MAdd on
//     the 8 MB register file, or, with F_LINK, through (I)NTT and then
//     routine 2's MMult/MAdd on the 1 MB register file;
//   routine 2 (OP_R2): one row per cycle through MMult -> MAdd on the 1 MB
//     register file, so HAdd/PMult-type work runs beside the (I)NTT pipeline;
//   auxiliary: OP_MOVE (buffer/register-file copies), OP_AUTO, OP_DECOMP,
//     OP_LOADTW and the key-switching operations OP_KSBITS (send n*t bits,
//     spread over the KS chips and banks), OP_KSREAD and OP_KSCLR.
// Instructions leave the queue in order; one that needs a busy sequencer
// waits at the head.  OP_SETCSR, OP_SYNC and OP_LOADTW wait until every
// pipeline has drained; an R1 whose lane mode or transform direction differs
// from the previous one waits for routine 1 to drain; a linked R1 waits for
// routine 2 to drain and then holds routine 2 off until its rows are written.
// Data dependencies between instructions are the host scheduler's job.
// The paper describes the controller's role only; the instruction set, the
// queue and all these rules are this design's.
//
// KS bit g of an OP_KSBITS (g = i*t + j, bit j of coefficient i of row src_a)
// goes to chip g mod KS_CHIPS, bank (g / KS_CHIPS) mod KS_BANKS and key row
// base + g / (KS_CHIPS*KS_BANKS); a chip whose bank is busy stalls the stream.
//
// perf[] counts: 0 R1 rows, 1 R2 rows, 2 cycles in which both routines issued,
// 3 link rows, 4 KS stall cycles, 5 KS bits sent, 6 automorphisms,
// 7 decomposed rows.
module nmc_controller
  import apache_pkg::*;
#(
  parameter int unsigned LANES     = 256,
  parameter int unsigned QDEPTH    = 16,
  parameter int unsigned KS_CHIPS  = 4,
  parameter int unsigned KS_BANKS  = 16,
  parameter int unsigned AROWS     = 32,
  parameter int unsigned ACOLS     = 64,
  localparam int unsigned RW       = $clog2(2 * AROWS * ACOLS),
  localparam int unsigned POLY_ROWS = (AROWS * ACOLS) / LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    instr_valid,
  input  instr_t                  instr,
  output logic                    instr_ready,
  output logic                    busy,
  // core configuration
  output modulus_t                m,
  output row_ctl_t                r1,
  output logic                    r1_inv,
  output lane_mode_e              r1_mode,
  output row_ctl_t                r2,
  output logic                    m_rd_en,
  output space_e                  m_rd_sp,
  output logic [15:0]             m_rd_addr,
  output rd_to_e                  m_rd_to,
  output logic [1:0]              m_unit,
  output lane_mode_e              m_mode,
  output logic                    wb_set,
  output space_e                  wb_sp,
  output logic [15:0]             wb_addr,
  input  logic [15:0]             wb_count,
  output logic                    auto_start,
  output logic                    auto_ckks,
  output logic [RW-1:0]           auto_rot,
  input  logic                    auto_ready,
  output logic [5:0]              dec_base,
  output logic [3:0]              dec_levels,
  input  logic                    dec_ready,
  input  logic [LANES-1:0][W-1:0] ks_row,
  // key-switching chips
  output logic [KS_CHIPS-1:0]     ks_valid,
  output ks_cmd_t                 ks_cmd,
  input  logic [KS_CHIPS-1:0]     ks_ready,
  output logic [7:0][31:0]        perf
);
  localparam int unsigned QW = $clog2(QDEPTH);
  localparam int unsigned CB = $clog2(KS_CHIPS);
  localparam int unsigned BB = $clog2(KS_BANKS);

  // ---------------- instruction queue ----------------
  instr_t       q [QDEPTH];
  logic [QW:0]  q_cnt;
  logic [QW-1:0] q_rd, q_wr;
  instr_t       head;
  logic         pop;
  assign head        = q[q_rd];
  assign instr_ready = (32'(q_cnt) < QDEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt <= '0; q_rd <= '0; q_wr <= '0;
    end else begin
      if (instr_valid && instr_ready) begin
        q[q_wr] <= instr;
        q_wr    <= q_wr + 1'b1;
      end
      if (pop) q_rd <= q_rd + 1'b1;
      q_cnt <= q_cnt + (QW+1)'(instr_valid && instr_ready) - (QW+1)'(pop);
    end
  end

  // ---------------- CSRs ----------------
  word_t csr [NUM_CSR];
  always_comb begin
    m.p    = csr[CSR_P];
    m.u    = csr[CSR_U];
    m.k_lo = csr[CSR_K][6:0];
    m.k_hi = csr[CSR_K][14:8];
    dec_base   = csr[CSR_DEC][5:0];
    dec_levels = csr[CSR_DEC][11:8];
    auto_rot   = RW'(csr[CSR_ROT]);
  end

  // ---------------- sequencer state ----------------
  logic        r1_act, r2_act;
  instr_t      r1_i, r2_i;
  logic [15:0] r1_n, r2_n;
  logic [5:0]  r1_drain, r2_drain;
  logic        link_hold;             // link rows issued and not yet written
  logic        r1_empty, r2_empty;

  typedef enum logic [3:0] {
    M_IDLE, M_MOVE, M_WAITWB, M_AUTO_LD, M_AUTO_GO, M_DEC_RD, M_DEC_WAIT,
    M_KS_LD, M_KS_BITS, M_KS_READ, M_KS_CLR
  } mstate_e;
  mstate_e     ms;
  instr_t      m_i;
  logic [15:0] m_n, m_target;
  logic [1:0]  m_wait;
  logic [15:0] ks_g, ks_total;
  logic [5:0]  ks_j;
  logic [15:0] ks_ci;

  assign r1_empty = !r1_act && r1_drain == 0;
  assign r2_empty = !r2_act && r2_drain == 0;
  wire   all_idle = r1_empty && r2_empty && ms == M_IDLE;

  // dispatch decision for the head of the queue
  logic go;
  always_comb begin
    go = 1'b0;
    if (q_cnt != 0) begin
      case (head.op)
        OP_NOP:              go = 1'b1;
        OP_SETCSR, OP_SYNC:  go = all_idle;
        OP_LOADTW:           go = all_idle;
        OP_R1: begin
          go = !r1_act;
          if (head.mode != r1_mode || head.flags[F_NTT_INV] != r1_inv) go = go && r1_empty;
          if (head.flags[F_LINK]) go = go && r1_empty && r2_empty;
        end
        OP_R2:               go = !r2_act && !link_hold && !(r1_act && r1_i.flags[F_LINK]);
        default:             go = (ms == M_IDLE);
      endcase
    end
  end
  assign pop = go;
  assign busy = (q_cnt != 0) || !all_idle;

  // KS bit command for the current bit
  logic ks_bit;
  logic [CB-1:0] ks_chip;
  always_comb begin
    ks_bit  = ks_row[ks_ci[$clog2(LANES)-1:0]][ks_j];
    ks_chip = ks_g[CB-1:0];
    ks_cmd  = '0;
    ks_valid = '0;
    case (ms)
      M_KS_BITS: begin
        ks_cmd.op    = KS_ACC;
        ks_cmd.mode  = m_i.mode;
        ks_cmd.bit_v = ks_bit;
        ks_cmd.bank  = 4'(ks_g[CB +: BB]);
        ks_cmd.row   = csr[CSR_KS][31:16] + 16'(ks_g >> (CB + BB));
        ks_valid[ks_chip] = 1'b1;
      end
      M_KS_READ: begin
        ks_cmd.op   = KS_RDACC;
        ks_cmd.bank = m_i.src_b[3:0];
        ks_valid[m_i.unit[CB-1:0]] = (m_n == 0);
      end
      M_KS_CLR: begin
        ks_cmd.op = KS_CLR;
        ks_valid  = {KS_CHIPS{&ks_ready}};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_CSR; k++) csr[k] <= '0;
      r1_act <= 1'b0; r2_act <= 1'b0; r1_n <= '0; r2_n <= '0;
      r1_i <= '0; r2_i <= '0; r1_mode <= MODE64; r1_inv <= 1'b0;
      r1_drain <= '0; r2_drain <= '0; link_hold <= 1'b0;
      r1 <= '0; r2 <= '0;
      ms <= M_IDLE; m_i <= '0; m_n <= '0; m_target <= '0; m_wait <= '0;
      m_rd_en <= 1'b0; m_rd_sp <= SP_BUF; m_rd_addr <= '0; m_rd_to <= TO_WB;
      m_unit <= '0; m_mode <= MODE64;
      wb_set <= 1'b0; wb_sp <= SP_RF8; wb_addr <= '0;
      auto_start <= 1'b0; auto_ckks <= 1'b0;
      ks_g <= '0; ks_total <= '0; ks_j <= '0; ks_ci <= '0;
      for (int k = 0; k < 8; k++) perf[k] <= '0;
    end else begin
      // ---------- dispatch ----------
      if (go) begin
        case (head.op)
          OP_SETCSR: csr[head.dst[$clog2(NUM_CSR)-1:0]] <= head.imm;
          OP_R1: begin
            r1_act <= 1'b1; r1_i <= head; r1_n <= '0;
            r1_mode <= head.mode; r1_inv <= head.flags[F_NTT_INV];
          end
          OP_R2: begin
            r2_act <= 1'b1; r2_i <= head; r2_n <= '0;
          end
          OP_NOP, OP_SYNC: ;
          default: begin
            m_i    <= head;
            m_n    <= '0;
            m_unit <= head.unit;
            m_mode <= head.mode;
            case (head.op)
              OP_MOVE: begin
                ms <= M_MOVE; wb_set <= 1'b1; wb_sp <= space_e'(head.ma_op); wb_addr <= head.dst;
                m_target <= head.count;
              end
              OP_LOADTW: begin
                m_rd_en <= 1'b1; m_rd_sp <= SP_RF8; m_rd_addr <= head.src_a; m_rd_to <= TO_TW;
              end
              OP_AUTO: begin
                ms <= M_AUTO_LD; wb_set <= 1'b1; wb_sp <= SP_RF8; wb_addr <= head.dst;
                m_target <= 16'(POLY_ROWS);
              end
              OP_DECOMP: begin
                ms <= M_DEC_RD; wb_set <= 1'b1; wb_sp <= SP_RF8; wb_addr <= head.dst;
              end
              OP_KSBITS: begin
                ms <= M_KS_LD;
                m_rd_en <= 1'b1; m_rd_sp <= SP_RF8; m_rd_addr <= head.src_a; m_rd_to <= TO_KS;
                m_wait <= 2'd2;
              end
              OP_KSREAD: begin
                ms <= M_KS_READ; wb_set <= 1'b1; wb_sp <= SP_RF8; wb_addr <= head.dst;
                m_target <= 16'd1;
              end
              default: ms <= M_KS_CLR;   // OP_KSCLR
            endcase
          end
        endcase
      end

      // ---------- routine 1 ----------
      r1 <= '0;
      if (r1_act) begin
        r1.valid  <= 1'b1;
        r1.mode   <= r1_i.mode;
        r1.ntt_en <= r1_i.flags[F_NTT_EN];
        r1.mm_en  <= r1_i.flags[F_MM_EN];
        r1.ma_op  <= ma_op_e'(r1_i.ma_op);
        r1.link   <= r1_i.flags[F_LINK];
        r1.a      <= r1_i.src_a + r1_n;
        r1.b      <= r1_i.src_b + r1_n;
        r1.c      <= r1_i.src_c + r1_n;
        r1.dst    <= r1_i.dst + r1_n;
        r1_n      <= r1_n + 16'd1;
        if (r1_n + 16'd1 >= r1_i.count) r1_act <= 1'b0;
        r1_drain  <= 6'(R1_LAT + 1);
        if (r1_i.flags[F_LINK]) link_hold <= 1'b1;
        perf[0] <= perf[0] + 32'd1;
        if (r1_i.flags[F_LINK]) perf[3] <= perf[3] + 32'd1;
      end else if (r1_drain != 0) begin
        r1_drain <= r1_drain - 6'd1;
        if (r1_drain == 6'd1) link_hold <= 1'b0;
      end
      if (r1_act && r1_n >= r1_i.count) begin   // zero-row instruction
        r1_act <= 1'b0;
        r1     <= '0;
      end

      // ---------- routine 2 ----------
      r2 <= '0;
      if (r2_act) begin
        r2.valid  <= 1'b1;
        r2.mode   <= r2_i.mode;
        r2.mm_en  <= r2_i.flags[F_MM_EN];
        r2.ma_op  <= ma_op_e'(r2_i.ma_op);
        r2.a      <= r2_i.src_a + r2_n;
        r2.b      <= r2_i.src_b + r2_n;
        r2.c      <= r2_i.src_c + r2_n;
        r2.dst    <= r2_i.dst + r2_n;
        r2_n      <= r2_n + 16'd1;
        if (r2_n + 16'd1 >= r2_i.count) r2_act <= 1'b0;
        r2_drain  <= 6'(R2_LAT + 1);
        perf[1] <= perf[1] + 32'd1;
        if (r1_act) perf[2] <= perf[2] + 32'd1;
      end else if (r2_drain != 0) begin
        r2_drain <= r2_drain - 6'd1;
      end

      // ---------- auxiliary sequencer ----------
      if (!(go && head.op == OP_LOADTW) && !(go && head.op == OP_KSBITS)) m_rd_en <= 1'b0;
      if (!(go && (head.op == OP_MOVE || head.op == OP_AUTO || head.op == OP_DECOMP || head.op == OP_KSREAD)))
        wb_set <= 1'b0;
      auto_start <= 1'b0;
      case (ms)
        M_MOVE: begin
          if (m_n < m_i.count) begin
            m_rd_en <= 1'b1; m_rd_sp <= space_e'(m_i.src_sp); m_rd_addr <= m_i.src_a + m_n; m_rd_to <= TO_WB;
            m_n <= m_n + 16'd1;
          end else ms <= M_WAITWB;
        end
        M_WAITWB: if (wb_count >= m_target) ms <= M_IDLE;
        M_AUTO_LD: begin
          if (32'(m_n) < POLY_ROWS) begin
            m_rd_en <= 1'b1; m_rd_sp <= SP_RF8; m_rd_addr <= m_i.src_a + m_n; m_rd_to <= TO_AUTO;
            m_n <= m_n + 16'd1;
            m_wait <= 2'd2;
          end else if (m_wait != 0) begin
            m_wait <= m_wait - 2'd1;
          end else begin
            ms <= M_AUTO_GO;
          end
        end
        M_AUTO_GO: if (auto_ready) begin
          auto_start <= 1'b1;
          auto_ckks  <= m_i.flags[F_CKKS];
          perf[6]    <= perf[6] + 32'd1;
          ms         <= M_WAITWB;
        end
        M_DEC_RD: begin
          if (m_n >= m_i.count) ms <= M_IDLE;
          else if (dec_ready && wb_count == 16'(32'(m_n) * 32'(dec_levels))) begin
            m_rd_en <= 1'b1; m_rd_sp <= SP_RF8; m_rd_addr <= m_i.src_a + m_n; m_rd_to <= TO_DEC;
            m_n <= m_n + 16'd1;
            m_target <= 16'(32'(m_n + 16'd1) * 32'(dec_levels));
            perf[7] <= perf[7] + 32'd1;
            ms <= M_DEC_WAIT;
          end
        end
        M_DEC_WAIT: if (wb_count >= m_target) ms <= M_DEC_RD;
        M_KS_LD: begin
          if (m_wait != 0) m_wait <= m_wait - 2'd1;
          else begin
            ms <= M_KS_BITS;
            ks_g <= '0; ks_j <= '0; ks_ci <= '0;
            ks_total <= 16'(32'(m_i.count) * 32'(csr[CSR_KS][5:0]));
          end
        end
        M_KS_BITS: begin
          if (ks_g >= ks_total) ms <= M_IDLE;
          else if (ks_ready[ks_chip]) begin
            ks_g <= ks_g + 16'd1;
            perf[5] <= perf[5] + 32'd1;
            if (ks_j + 6'd1 >= csr[CSR_KS][5:0]) begin ks_j <= '0; ks_ci <= ks_ci + 16'd1; end
            else ks_j <= ks_j + 6'd1;
          end else begin
            perf[4] <= perf[4] + 32'd1;
          end
        end
        M_KS_READ: begin
          if (m_n == 0 && ks_ready[m_i.unit[CB-1:0]]) begin
            m_n <= 16'd1;
            ms  <= M_WAITWB;
          end
        end
        M_KS_CLR: if (&ks_ready) ms <= M_IDLE;
        default: ;
      endcase
    end
  end
endmodule
