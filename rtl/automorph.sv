// automorph: automorphism unit for TFHE rotations and CKKS automorphisms.
//
// A polynomial of N = AROWS*ACOLS coefficients is held in an "original"
// array laid out as the paper's figure shows: coefficient c*AROWS + r sits in
// row r, column c, so row i holds i, i+32, ..., i+2016 for the default
// 32 x 64 array.  Two more arrays of the same shape form a ping-pong buffer.
//
// TFHE mode computes X^a * ACC - ACC in Z_p[X]/(X^N + 1) for 0 <= a < 2N.
// A round reads one row i per cycle into the column registers, rotates the
// columns by Colshift = (a mod N) / AROWS in the next cycle, negates the words
// that wrapped past X^N, and writes the result to row w = i + Rowshift of the
// current ping-pong bank, Rowshift = (a mod N) mod AROWS.  A row whose target
// index passes AROWS wraps to row w - AROWS and moves one column further;
// a >= N negates everything.  The figure prints the row/column shifts and
// the 32-cycle rounds; the wrap, sign and a >= N handling are this design's
// completion of them.  After the round, the read-out subtracts the original
// array from the bank (the paper merges the rotation and the "- ACC"), IO_W
// words per cycle in natural order.  The next start may rotate the same
// original into the other bank while the read-out of this one is still
// running.  X^-a is obtained with a' = 2N - a.
//
// CKKS mode computes the automorphism X -> X^g in the coefficient domain:
// output j is read straight from the original array at s = j * g^-1 mod 2N,
// negated when s >= N.  `rot` carries g^-1 (odd) in this mode.
//
// Interface: ld_valid/ld_data load IO_W coefficients per cycle in natural
// order (N/IO_W beats; the load pointer restarts after each start).  start is
// taken when ready is high.  Results appear on out_valid/out_data in natural
// order, N/IO_W beats, out_last on the final one.  Words are one 64-bit or two
// 32-bit residues mod p (`mode`), inputs already reduced.
//
// Timing: TFHE: the first result row leaves AROWS+5 cycles after the start
// cycle (AROWS cycles of row shifting plus the column shift, negation,
// subtraction and output registers), then one row per cycle for N/IO_W
// cycles.  CKKS: the permuted read-out begins two cycles after start.
module automorph
  import apache_pkg::*;
#(
  parameter int unsigned AROWS = 32,
  parameter int unsigned ACOLS = 64,
  parameter int unsigned IO_W  = 256,
  localparam int unsigned N    = AROWS * ACOLS,
  localparam int unsigned RW   = $clog2(2 * N)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  lane_mode_e             mode,
  input  word_t                  p,
  input  logic                   ld_valid,
  input  logic [IO_W-1:0][W-1:0] ld_data,
  input  logic                   start,
  input  logic                   ckks,
  input  logic [RW-1:0]          rot,
  output logic                   ready,
  output logic                   busy,
  output logic                   out_valid,
  output logic                   out_last,
  output logic [IO_W-1:0][W-1:0] out_data
);
  localparam int unsigned NBEAT = N / IO_W;
  localparam int unsigned CPB   = IO_W / AROWS;       // columns per beat
  localparam int unsigned BW    = (NBEAT > 1) ? $clog2(NBEAT) : 1;
  localparam int unsigned RRW   = $clog2(AROWS);
  localparam int unsigned CW    = $clog2(ACOLS);

  word_t orig [AROWS][ACOLS];
  word_t pp   [2][AROWS][ACOLS];

  // ---------------- load ----------------
  logic [BW-1:0] ld_ptr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ld_ptr <= '0;
    else if (start && ready) ld_ptr <= '0;
    else if (ld_valid) ld_ptr <= (32'(ld_ptr) == NBEAT - 1) ? '0 : ld_ptr + 1'b1;
  end
  always_ff @(posedge clk) begin
    if (ld_valid)
      for (int k = 0; k < IO_W; k++)
        orig[k % AROWS][32'(ld_ptr) * CPB + k / AROWS] <= ld_data[k];
  end

  // ---------------- rotation round ----------------
  logic          rnd_act, rnd_s1, rnd_s2;     // reading / shifting / writing
  logic [RRW:0]  rnd_i;                       // row being read
  logic          rnd_bank, bank_nxt;
  logic [RRW-1:0] rs, w1, w2;
  logic [CW:0]   cs;
  logic          neg_all;
  word_t         colreg [ACOLS];
  logic [CW:0]   sh1;
  logic          pend, pend_bank;
  logic          ro_act, ro_ckks, ro_bank;
  logic [BW-1:0] ro_beat;
  logic [RW-1:0] ginv;

  // rotated row and sign per column (stage 1 -> stage 2 through cfg_madd)
  word_t rot_w  [ACOLS];
  logic  rot_n  [ACOLS];
  word_t neg_o  [ACOLS];

  assign ready = !rnd_act && !rnd_s1 && !rnd_s2 && !pend && !(ckks && ro_act);
  assign busy  = rnd_act || rnd_s1 || rnd_s2 || pend || ro_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rnd_act  <= 1'b0; rnd_s1 <= 1'b0; rnd_s2 <= 1'b0;
      rnd_i    <= '0;   rnd_bank <= 1'b0; bank_nxt <= 1'b0;
      rs <= '0; cs <= '0; neg_all <= 1'b0; w1 <= '0; w2 <= '0; sh1 <= '0;
      pend <= 1'b0; pend_bank <= 1'b0;
      ro_act <= 1'b0; ro_ckks <= 1'b0; ro_bank <= 1'b0; ro_beat <= '0; ginv <= '0;
    end else begin
      // accept an operation
      if (start && ready) begin
        if (!ckks) begin
          rnd_act  <= 1'b1;
          rnd_i    <= '0;
          rnd_bank <= bank_nxt;
          bank_nxt <= !bank_nxt;
          neg_all  <= (32'(rot) >= N);
          rs       <= RRW'((32'(rot) % N) % AROWS);
          cs       <= (CW+1)'((32'(rot) % N) / AROWS);
        end else begin
          ro_act  <= 1'b1;
          ro_ckks <= 1'b1;
          ro_beat <= '0;
          ginv    <= rot;
        end
      end
      // stage 0: read row rnd_i into the column registers
      rnd_s1 <= rnd_act;
      if (rnd_act) begin
        w1  <= RRW'(32'(rnd_i) + 32'(rs));
        sh1 <= (32'(rnd_i) + 32'(rs) >= AROWS) ? cs + 1'b1 : cs;
        if (32'(rnd_i) == AROWS - 1) rnd_act <= 1'b0;
        rnd_i <= rnd_i + 1'b1;
      end
      // stage 1: rotate and sign (registered by cfg_madd), stage 2: write
      rnd_s2 <= rnd_s1;
      w2     <= w1;
      if (rnd_s2 && !rnd_s1) begin
        pend      <= 1'b1;
        pend_bank <= rnd_bank;
      end
      // read-out engine
      if (!ro_act && pend && !(start && ready && ckks)) begin
        ro_act  <= 1'b1;
        ro_ckks <= 1'b0;
        ro_bank <= pend_bank;
        ro_beat <= '0;
        if (!(rnd_s2 && !rnd_s1)) pend <= 1'b0;
      end
      if (ro_act) begin
        ro_beat <= ro_beat + 1'b1;
        if (32'(ro_beat) == NBEAT - 1) ro_act <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk)
    if (rnd_act)
      for (int c = 0; c < ACOLS; c++) colreg[c] <= orig[rnd_i[RRW-1:0]][c];

  always_comb begin
    for (int c = 0; c < ACOLS; c++) begin
      int src;
      src = c - int'(sh1);
      rot_n[c] = (src < 0) ^ neg_all;
      if (src < 0) src += ACOLS;
      rot_w[c] = colreg[src];
    end
  end

  for (genvar c = 0; c < ACOLS; c++) begin : g_rot
    cfg_madd u_neg (.clk(clk), .mode(mode), .op(rot_n[c] ? MA_RSUB : MA_PASS),
                    .x(rot_w[c]), .y('0), .p(p), .z(neg_o[c]));
  end

  always_ff @(posedge clk)
    if (rnd_s2)
      for (int c = 0; c < ACOLS; c++) pp[rnd_bank][w2][c] <= neg_o[c];

  // ---------------- read-out ----------------
  word_t  ro_x [IO_W];
  word_t  ro_y [IO_W];
  ma_op_e ro_op [IO_W];
  always_comb begin
    for (int k = 0; k < IO_W; k++) begin
      int unsigned j, s;
      j = 32'(ro_beat) * IO_W + k;
      s = 0;
      ro_x[k]  = '0;
      ro_y[k]  = '0;
      ro_op[k] = MA_PASS;
      if (!ro_ckks) begin
        ro_x[k]  = pp[ro_bank][j % AROWS][j / AROWS];
        ro_y[k]  = orig[j % AROWS][j / AROWS];
        ro_op[k] = MA_SUB;
      end else begin
        s = (j * 32'(ginv)) % (2 * N);
        ro_op[k] = (s >= N) ? MA_RSUB : MA_PASS;
        if (s >= N) s -= N;
        ro_x[k]  = orig[s % AROWS][s / AROWS];
        ro_y[k]  = '0;
      end
    end
  end

  for (genvar k = 0; k < IO_W; k++) begin : g_ro
    cfg_madd u_sub (.clk(clk), .mode(mode), .op(ro_op[k]), .x(ro_x[k]), .y(ro_y[k]), .p(p), .z(out_data[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= ro_act;
      out_last  <= ro_act && (32'(ro_beat) == NBEAT - 1);
    end
  end
endmodule
