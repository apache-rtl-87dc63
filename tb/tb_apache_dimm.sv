// tb_apache_dimm: end-to-end test of one DIMM.
//
// Data enter through the external buffer port, operator instructions through
// the instruction queue, and results leave again through the buffer, so the
// whole path host -> data buffer -> register files -> functional units ->
// register files -> data buffer is exercised.  The test runs, with a
// software model of every result:
//   * routine 1 with NTT, MMult and MAdd; with the NTT bypassed and the MMult
//     bypassed; the NTT followed by an INTT that restores the input;
//   * routine 2 issued right behind routine 1, so both pipelines run at once;
//   * a linked routine 1, whose NTT output goes through routine 2's MMult and
//     MAdd into the 1 MB register file;
//   * a TFHE rotation (X^a*ACC - ACC) and a CKKS automorphism;
//   * a gadget decomposition;
//   * a PubKS-style bit stream into the KS chips, with enough bits per bank
//     that the stream stalls, and read-back of every bank accumulator;
//   * a switch to 2x32-bit lanes with an NTT and routine 2 in that mode.
// It also checks that routine 1 takes one row per cycle (8 rows take exactly
// 4 cycles longer than 4 rows).  Every mechanism is counted, and one that
// never happened counts as a failure.
// Reduced sizes: 64 lanes (one NTT kernel), small register files and buffer,
// 4 KS banks per chip with 16 rows of 4 words and 6-cycle DRAM timing.
module tb_apache_dimm;
  import apache_pkg::*;
  localparam int LANES = 64, NPT = 64, RF8 = 256, RF1 = 64, BUFR = 256;
  localparam int AROWS = 32, ACOLS = 64, N = AROWS * ACOLS, PROWS = N / LANES;
  localparam int CHIPS = 4, BANKS = 4, KROWS = 16, KW = 4, TT = 6;
  localparam int AB = $clog2(BUFR), KAW = $clog2(KROWS);
  localparam logic [63:0] P64 = 64'h3fffffffffffec81, U64 = 64'h400000000000137f;
  localparam logic [63:0] W64 = 64'h09af8f52d80baf51, NI64 = 64'h3effffffffffeccf;
  localparam logic [31:0] P0 = 32'h3ffffe81, U0 = 32'h4000017f, W0 = 32'h349387f9;
  localparam logic [31:0] P1 = 32'h1fffff01, U1 = 32'h200000ff, W1 = 32'h09836c02;
  typedef logic [LANES-1:0][W-1:0] row_t;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, busy;
  instr_t instr = '0;
  logic ext_re = 0, ext_we = 0;
  logic [AB-1:0] ext_raddr = '0, ext_waddr = '0;
  row_t ext_rdata, ext_wdata = '0;
  logic key_we = 0;
  logic [1:0] key_chip = '0;
  logic [3:0] key_bank = '0;
  logic [KAW-1:0] key_row = '0;
  logic [KW-1:0][W-1:0] key_data = '0;
  logic [7:0][31:0] perf;
  logic [31:0] ks_acc_total;
  logic ntt_busy, r2_busy;

  apache_dimm #(.LANES(LANES), .NPT(NPT), .RF8_ROWS(RF8), .RF1_ROWS(RF1), .BUF_ROWS(BUFR),
                .AROWS(AROWS), .ACOLS(ACOLS), .KS_CHIPS(CHIPS), .KS_BANKS(BANKS),
                .KS_ROWS(KROWS), .KS_WORDS(KW), .T_RCD(TT), .T_CAS(TT), .T_RP(TT)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;
  // loop bounds held in variables so that the reference loops stay loops
  int lanes_rt = LANES, npt_rt = NPT;

  // mechanism counters
  int n_overlap, n_link, n_stall, n_mode_sw, n_inv_sw, n_ntt_bypass, n_mm_bypass, n_auto, n_dec, n_ks;
  lane_mode_e last_mode = MODE64;
  logic last_inv = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_nmc.r1_mode != last_mode) n_mode_sw++;
    if (dut.u_nmc.r1_inv != last_inv) n_inv_sw++;
    last_mode = dut.u_nmc.r1_mode;
    last_inv  = dut.u_nmc.r1_inv;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference arithmetic ----------------
  function automatic logic [63:0] mulmod(logic [63:0] a, logic [63:0] b, logic [63:0] p);
    logic [127:0] r = ({64'd0, a} * {64'd0, b}) % {64'd0, p};
    return r[63:0];
  endfunction
  function automatic logic [63:0] powmod(logic [63:0] w, int e, logic [63:0] p);
    logic [63:0] r = 1;
    for (int i = 0; i < e; i++) r = mulmod(r, w, p);
    return r;
  endfunction
  function automatic word_t lanes2(lane_mode_e md, int op, word_t a, word_t b);
    // op 0: a*b, 1: a+b, 2: a-b  (mod p per lane)
    word_t r;
    if (md == MODE64) begin
      case (op)
        0: r = mulmod(a, b, P64);
        1: r = 64'((65'(a) + 65'(b)) % 65'(P64));
        default: r = (a >= b) ? a - b : a + P64 - b;
      endcase
    end else begin
      for (int l = 0; l < 2; l++) begin
        logic [63:0] x = {32'd0, a[32*l +: 32]}, y = {32'd0, b[32*l +: 32]};
        logic [63:0] p = (l == 0) ? {32'd0, P0} : {32'd0, P1}, z;
        case (op)
          0: z = mulmod(x, y, p);
          1: z = (x + y) % p;
          default: z = (x >= y) ? x - y : x + p - y;
        endcase
        r[32*l +: 32] = z[31:0];
      end
    end
    return r;
  endfunction
  function automatic row_t ntt_ref(row_t v, lane_mode_e md, bit inv);
    row_t r;
    for (int k = 0; k < npt_rt; k++) begin
      if (md == MODE64) begin
        logic [63:0] w = powmod(W64, inv ? (k * (NPT - 1)) % NPT : k, P64), acc = 0, wj = 1;
        for (int j = 0; j < npt_rt; j++) begin
          acc = 64'((65'(acc) + 65'(mulmod(v[j], wj, P64))) % 65'(P64));
          wj = mulmod(wj, w, P64);
        end
        r[k] = acc;
      end else begin
        for (int l = 0; l < 2; l++) begin
          logic [63:0] p = (l == 0) ? {32'd0, P0} : {32'd0, P1};
          logic [63:0] w = powmod((l == 0) ? {32'd0, W0} : {32'd0, W1}, k, p), acc = 0, wj = 1;
          for (int j = 0; j < npt_rt; j++) begin
            acc = (acc + mulmod({32'd0, v[j][32*l +: 32]}, wj, p)) % p;
            wj = mulmod(wj, w, p);
          end
          r[k][32*l +: 32] = acc[31:0];
        end
      end
    end
    return r;
  endfunction
  function automatic row_t rand_row(lane_mode_e md);
    row_t r;
    for (int k = 0; k < lanes_rt; k++)
      r[k] = (md == MODE64) ? {$urandom, $urandom} % P64 : {32'($urandom % P1), 32'($urandom % P0)};
    return r;
  endfunction
  function automatic row_t rowop(lane_mode_e md, int op, row_t a, row_t b);
    row_t r;
    for (int k = 0; k < lanes_rt; k++) r[k] = lanes2(md, op, a[k], b[k]);
    return r;
  endfunction

  // ---------------- bus tasks ----------------
  task automatic ext_write(int row, row_t d);
    @(negedge clk); ext_we = 1; ext_waddr = AB'(row); ext_wdata = d;
    @(negedge clk); ext_we = 0;
  endtask
  task automatic ext_read(int row, output row_t d);
    @(negedge clk); ext_re = 1; ext_raddr = AB'(row);
    @(posedge clk); #1 d = ext_rdata;
    @(negedge clk); ext_re = 0;
  endtask
  task automatic send(instr_t i);
    @(negedge clk);
    instr_valid = 1; instr = i;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    #1 instr_valid = 0;
  endtask
  function automatic instr_t mk(opcode_e op, lane_mode_e md = MODE64, int unit = 0, int maop = 0,
                                int srcsp = 0, int flags = 0, int dst = 0, int a = 0, int b = 0,
                                int c = 0, int count = 0, word_t imm = 0);
    instr_t i = '0;
    i.op = op; i.mode = md; i.unit = 2'(unit); i.ma_op = 2'(maop); i.src_sp = 2'(srcsp);
    i.flags = 8'(flags); i.dst = 16'(dst); i.src_a = 16'(a); i.src_b = 16'(b); i.src_c = 16'(c);
    i.count = 16'(count); i.imm = imm;
    return i;
  endfunction
  task automatic setcsr(int idx, word_t v);
    send(mk(OP_SETCSR, MODE64, 0, 0, 0, 0, idx, 0, 0, 0, 0, v));
  endtask
  task automatic move(space_e from, int a, space_e to, int d, int n);
    send(mk(OP_MOVE, MODE64, 0, int'(to), int'(from), 0, d, a, 0, 0, n));
  endtask
  task automatic wait_idle();
    repeat (3) @(posedge clk);
    while (busy) @(posedge clk);
  endtask
  task automatic check_row(string what, int row, row_t e);
    row_t g;
    int f0 = failures;
    ext_read(row, g);
    for (int k = 0; k < lanes_rt; k++) begin
      checks++;
      if (g[k] !== e[k]) begin
        failures++;
        if (failures < 10) $display("%s row %0d lane %0d got %h exp %h", what, row, k, g[k], e[k]);
      end
    end
    if (failures != f0) $display("%s row %0d: %0d lanes wrong", what, row, failures - f0);
  endtask

  // ---------------- test ----------------
  // buffer image written before the run, and expected buffer rows after it
  row_t  in_img [BUFR], exp_img [BUFR];
  bit    in_v [BUFR], exp_v [BUFR];
  string exp_what [BUFR];
  word_t fpoly [N];
  word_t key [CHIPS][BANKS][KROWS][KW];
  localparam int ROT_A = 37, CKKS_G = 3, CKKS_GI = 2731, DBETA = 8, DLEV = 3, KST = 4, KSN = 16;

  function automatic void expect_row(int row, string what, row_t e);
    exp_img[row] = e; exp_v[row] = 1; exp_what[row] = what;
  endfunction

  // operands: buffer rows 0..3 A, 4..7 B, 8..11 C, 12..15 n^-1, 16 twiddles,
  // 64..95 polynomial F; 2x32-bit operands A2/B2/C2 in 200..211, twiddles 212
  function automatic void make_inputs();
    for (int r = 0; r < BUFR; r++) begin in_v[r] = 0; exp_v[r] = 0; in_img[r] = '0; end
    for (int r = 0; r < 12; r++) begin in_img[r] = rand_row(MODE64); in_v[r] = 1; end
    for (int r = 12; r < 16; r++) begin
      for (int k = 0; k < lanes_rt; k++) in_img[r][k] = NI64;
      in_v[r] = 1;
    end
    for (int k = 0; k < npt_rt / 2; k++) begin
      in_img[16][k] = powmod(W64, k, P64);
      in_img[16][NPT / 2 + k] = powmod(W64, (NPT - k) % NPT, P64);
      in_img[212][k] = {powmod({32'd0, W1}, k, {32'd0, P1})[31:0], powmod({32'd0, W0}, k, {32'd0, P0})[31:0]};
      in_img[212][NPT / 2 + k] = {powmod({32'd0, W1}, (NPT - k) % NPT, {32'd0, P1})[31:0],
                                  powmod({32'd0, W0}, (NPT - k) % NPT, {32'd0, P0})[31:0]};
    end
    in_v[16] = 1; in_v[212] = 1;
    for (int r = 0; r < PROWS; r++) begin
      in_img[64 + r] = rand_row(MODE64); in_v[64 + r] = 1;
      for (int k = 0; k < lanes_rt; k++) fpoly[r * LANES + k] = in_img[64 + r][k];
    end
    for (int r = 200; r < 212; r++) begin in_img[r] = rand_row(MODE2X32); in_v[r] = 1; end
    for (int c = 0; c < CHIPS; c++) for (int b = 0; b < BANKS; b++) for (int r = 0; r < KROWS; r++)
      for (int w = 0; w < KW; w++) key[c][b][r][w] = {$urandom, $urandom};
  endfunction

  function automatic void make_expected();
    word_t rr [N], e_tfhe [N], e_ckks [N];
    word_t e_acc [CHIPS][BANKS][KW];
    for (int r = 0; r < 4; r++) begin
      for (int md = 0; md < 2; md++) begin
        lane_mode_e m = md ? MODE2X32 : MODE64;
        int base = md ? 200 : 0;
        row_t t = ntt_ref(in_img[base + r], m, 0);
        row_t e1 = rowop(m, 1, rowop(m, 0, t, in_img[base + 4 + r]), in_img[base + 8 + r]);
        row_t e2 = rowop(m, 1, rowop(m, 0, in_img[base + r], in_img[base + 4 + r]), in_img[base + 8 + r]);
        if (md == 0) begin
          expect_row(32 + r, "R1 ntt*b+c", e1);
          expect_row(48 + r, "R1 ntt", t);
          expect_row(56 + r, "R1 intt", in_img[r]);
          expect_row(232 + r, "R2 a*b+c", e2);
          expect_row(240 + r, "link", e1);
        end else begin
          expect_row(216 + r, "R1 2x32", e1);
          expect_row(248 + r, "R2 2x32", e2);
        end
      end
      expect_row(40 + r, "R1 bypass a-c", rowop(MODE64, 2, in_img[r], in_img[8 + r]));
      expect_row(244 + r, "R2 a-c", rowop(MODE64, 2, in_img[r], in_img[8 + r]));
    end
    // automorphisms
    for (int j = 0; j < N; j++) begin
      int d = (j + ROT_A) % (2 * N);
      if (d < N) rr[d] = fpoly[j]; else rr[d - N] = (fpoly[j] == 0) ? 0 : P64 - fpoly[j];
    end
    for (int j = 0; j < N; j++) e_tfhe[j] = lanes2(MODE64, 2, rr[j], fpoly[j]);
    for (int j = 0; j < N; j++) begin
      int d = (j * CKKS_G) % (2 * N);
      if (d < N) e_ckks[d] = fpoly[j]; else e_ckks[d - N] = (fpoly[j] == 0) ? 0 : P64 - fpoly[j];
    end
    for (int r = 0; r < PROWS; r++) begin
      for (int k = 0; k < lanes_rt; k++) begin
        exp_img[96 + r][k] = e_tfhe[r * LANES + k];
        exp_img[128 + r][k] = e_ckks[r * LANES + k];
      end
      exp_v[96 + r] = 1; exp_what[96 + r] = "tfhe rot";
      exp_v[128 + r] = 1; exp_what[128 + r] = "ckks auto";
    end
    // decomposition: signed digits, most significant level first
    for (int r = 0; r < 2; r++)
      for (int lev = 1; lev <= DLEV; lev++) begin
        int row = 160 + r * DLEV + lev - 1;
        for (int k = 0; k < lanes_rt; k++) begin
          logic [127:0] t;
          longint d [16];
          int carry = 0;
          t = ({64'd0, in_img[r][k]} + (128'd1 << (64 - DLEV * DBETA - 1))) >> (64 - DLEV * DBETA);
          t = t & ((128'd1 << (DLEV * DBETA)) - 1);
          for (int i = DLEV; i >= 1; i--) begin
            longint x = longint'(t & ((128'd1 << DBETA) - 1)) + carry;
            t = t >> DBETA;
            if (x >= (longint'(1) << (DBETA - 1))) begin x = x - (longint'(1) << DBETA); carry = 1; end
            else carry = 0;
            d[i] = x;
          end
          exp_img[row][k] = (d[lev] < 0) ? P64 - 64'(-d[lev]) : 64'(d[lev]);
        end
        exp_v[row] = 1; exp_what[row] = "decomp";
      end
    // key-switching accumulators
    for (int c = 0; c < CHIPS; c++) for (int b = 0; b < BANKS; b++) for (int w = 0; w < KW; w++) e_acc[c][b][w] = 0;
    for (int g = 0; g < KSN * KST; g++) begin
      int i = g / KST, j = g % KST, c = g % CHIPS, b = (g / CHIPS) % BANKS, kr = g / (CHIPS * BANKS);
      if (in_img[0][i][j]) for (int w = 0; w < KW; w++) e_acc[c][b][w] += key[c][b][kr][w];
    end
    for (int c = 0; c < CHIPS; c++)
      for (int b = 0; b < BANKS; b++) begin
        int row = 170 + c * BANKS + b;
        exp_img[row] = '0;
        for (int w = 0; w < KW; w++) exp_img[row][w] = e_acc[c][b][w];
        exp_v[row] = 1; exp_what[row] = "ks acc";
      end
  endfunction

  initial begin
    int t0, d4, d8;
    n_overlap = 0; n_link = 0; n_stall = 0; n_mode_sw = 0; n_inv_sw = 0;
    n_ntt_bypass = 0; n_mm_bypass = 0; n_auto = 0; n_dec = 0; n_ks = 0;
    make_inputs();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ----- data into the buffer and keys into the KS chips -----
    for (int r = 0; r < BUFR; r++) if (in_v[r]) ext_write(r, in_img[r]);
    for (int c = 0; c < CHIPS; c++)
      for (int b = 0; b < BANKS; b++)
        for (int r = 0; r < KROWS; r++) begin
          @(negedge clk);
          key_we = 1; key_chip = 2'(c); key_bank = 4'(b); key_row = KAW'(r);
          for (int w = 0; w < KW; w++) key_data[w] = key[c][b][r][w];
          @(negedge clk); key_we = 0;
        end

    // ----- configuration and operand moves -----
    setcsr(CSR_P, P64); setcsr(CSR_U, U64); setcsr(CSR_K, 64'(62 | (62 << 8)));
    move(SP_BUF, 0, SP_RF8, 0, 17);
    move(SP_BUF, 64, SP_RF8, 64, PROWS);
    move(SP_BUF, 0, SP_RF1, 0, 12);
    send(mk(OP_LOADTW, MODE64, 0, 0, 0, 0, 0, 16));
    wait_idle();

    // ----- rate of routine 1: one row per cycle -----
    for (int n = 4; n <= 8; n += 4) begin
      t0 = cyc; send(mk(OP_R1, MODE64, 0, MA_PASS, 0, 0, 240, 0, 0, 0, n)); wait_idle();
      if (n == 4) d4 = cyc - t0; else d8 = cyc - t0;
    end
    checks++;
    if (d8 - d4 != 4) begin failures++; $display("R1 rate: 4 rows %0d cycles, 8 rows %0d", d4, d8); end
    n_ntt_bypass += 2; n_mm_bypass += 2;

    // ----- routine 1 and routine 2 together -----
    send(mk(OP_R1, MODE64, 0, MA_ADD, 0, (1 << F_NTT_EN) | (1 << F_MM_EN), 32, 0, 4, 8, 4));
    send(mk(OP_R2, MODE64, 0, MA_ADD, 0, (1 << F_MM_EN), 16, 0, 4, 8, 4));
    // NTT and MMult bypassed: A - C
    send(mk(OP_R1, MODE64, 0, MA_SUB, 0, 0, 40, 0, 0, 8, 4));
    n_ntt_bypass++; n_mm_bypass++;
    // NTT then INTT * n^-1 restores A
    send(mk(OP_R1, MODE64, 0, MA_PASS, 0, (1 << F_NTT_EN), 48, 0, 0, 0, 4));
    send(mk(OP_R1, MODE64, 0, MA_PASS, 0, (1 << F_NTT_EN) | (1 << F_NTT_INV) | (1 << F_MM_EN), 56, 48, 12, 0, 4));
    // linked: NTT(A) * B1 + C1 into RF1, then routine 2 behind it
    send(mk(OP_R1, MODE64, 0, MA_ADD, 0, (1 << F_NTT_EN) | (1 << F_MM_EN) | (1 << F_LINK), 24, 0, 4, 8, 4));
    send(mk(OP_R2, MODE64, 0, MA_SUB, 0, 0, 28, 0, 0, 8, 4));
    n_mm_bypass++;
    send(mk(OP_SYNC));

    // ----- automorphisms -----
    setcsr(CSR_ROT, ROT_A);
    send(mk(OP_AUTO, MODE64, 0, 0, 0, 0, 96, 64));
    send(mk(OP_SYNC));
    setcsr(CSR_ROT, CKKS_GI);   // the unit takes g^-1 mod 2N (3 * 2731 = 2*4096 + 1)
    send(mk(OP_AUTO, MODE64, 1, 0, 0, (1 << F_CKKS), 128, 64));

    // ----- decomposition -----
    setcsr(CSR_DEC, 64'(DBETA | (DLEV << 8)));
    send(mk(OP_DECOMP, MODE64, 0, 0, 0, 0, 160, 0, 0, 0, 2));

    // ----- key switching -----
    send(mk(OP_KSCLR));
    setcsr(CSR_KS, 64'(KST));
    send(mk(OP_KSBITS, MODE64, 0, 0, 0, 0, 0, 0, 0, 0, KSN));
    for (int c = 0; c < CHIPS; c++)
      for (int b = 0; b < BANKS; b++)
        send(mk(OP_KSREAD, MODE64, c, 0, 0, 0, 170 + c * BANKS + b, 0, b));
    send(mk(OP_SYNC));
    wait_idle();

    // ----- 2x32-bit lanes -----
    setcsr(CSR_P, {P1, P0}); setcsr(CSR_U, {U1, U0}); setcsr(CSR_K, 64'(30 | (29 << 8)));
    move(SP_BUF, 200, SP_RF8, 200, 13);
    move(SP_BUF, 200, SP_RF1, 32, 12);
    send(mk(OP_LOADTW, MODE64, 0, 0, 0, 0, 0, 212));
    send(mk(OP_R1, MODE2X32, 0, MA_ADD, 0, (1 << F_NTT_EN) | (1 << F_MM_EN), 216, 200, 204, 208, 4));
    send(mk(OP_R2, MODE2X32, 0, MA_ADD, 0, (1 << F_MM_EN), 44, 32, 36, 40, 4));
    send(mk(OP_SYNC));

    // ----- results back to the buffer -----
    move(SP_RF8, 32, SP_BUF, 32, 28);
    move(SP_RF8, 96, SP_BUF, 96, 2 * PROWS + 2 * DLEV);
    move(SP_RF8, 170, SP_BUF, 170, CHIPS * BANKS);
    move(SP_RF8, 216, SP_BUF, 216, 4);
    move(SP_RF1, 16, SP_BUF, 232, 16);
    move(SP_RF1, 44, SP_BUF, 248, 4);
    wait_idle();

    // ----- compare -----
    make_expected();
    for (int r = 0; r < BUFR; r++) if (exp_v[r]) check_row(exp_what[r], r, exp_img[r]);

    // ----- mechanisms -----
    n_overlap = int'(perf[2]);
    n_link    = int'(perf[3]);
    n_stall   = int'(perf[4]);
    n_auto    = int'(perf[6]);
    n_dec     = int'(perf[7]);
    n_ks      = int'(perf[5]);
    $display("R1 rows %0d, R2 rows %0d, overlap cycles %0d, link rows %0d, KS stall cycles %0d, KS bits %0d",
             perf[0], perf[1], n_overlap, n_link, n_stall, n_ks);
    $display("automorphisms %0d, decomposed rows %0d, lane-mode switches %0d, direction switches %0d, NTT bypass %0d, MMult bypass %0d",
             n_auto, n_dec, n_mode_sw, n_inv_sw, n_ntt_bypass, n_mm_bypass);
    checks++; if (n_overlap == 0) begin failures++; $display("no R1/R2 overlap"); end
    checks++; if (n_link != 4) begin failures++; $display("link rows %0d", n_link); end
    checks++; if (n_stall == 0) begin failures++; $display("no KS stall"); end
    checks++; if (n_ks != KSN * KST) begin failures++; $display("KS bits %0d", n_ks); end
    checks++; if (n_auto != 2) begin failures++; $display("automorphisms %0d", n_auto); end
    checks++; if (n_dec != 2) begin failures++; $display("decomp rows %0d", n_dec); end
    checks++; if (n_mode_sw == 0) begin failures++; $display("no lane-mode switch"); end
    checks++; if (n_inv_sw == 0) begin failures++; $display("no NTT direction switch"); end
    checks++; if (n_ntt_bypass == 0 || n_mm_bypass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
