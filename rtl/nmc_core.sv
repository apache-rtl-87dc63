// nmc_core: the NMC core's functional units and their configurable interconnect.
//
// Units: the 8 MB register file (RF8), the 1 MB register file (RF1), the
// (I)NTT FU, two MMult FUs and two MAdd FUs, N_AUTO automorphism units and
// N_DEC decomposition units.  They are wired into two pipelines, as in the
// paper's topology figure:
//   routine 1 (R1):  RF8 -> (I)NTT -> MMult -> MAdd -> RF8
//   routine 2 (R2):  RF1 ->           MMult -> MAdd -> RF1
// plus the switchable wire from the (I)NTT output to routine 2's MMult
// (`link` rows), and the auxiliary paths RF8 <-> automorphism,
// RF8 <-> decomposition, data buffer <-> register files, and the KS read port.
//
// Routine timing.  A row issued on r1 in cycle t reads operand a at t when it
// uses the (I)NTT (the transform takes NTT_LAT = 30 cycles), or at t+30 when
// it skips it; operand b (the MMult multiplicand) is read at t+30 and operand
// c (the MAdd addend) at t+34, each from the routine's register file, so they
// meet the row at the unit that uses them.  The result is written at
// t+R1_LAT = t+36.  A row issued on r2 in cycle t reads a and b at t, c at
// t+4 and is written at t+R2_LAT = t+6.  A link row follows R1's timing but
// takes b and c from RF1 through routine 2's MMult/MAdd and is written to
// RF1.  Both routines accept one row per cycle and run at the same time; the
// controller keeps routine 2 idle while link rows are in flight and keeps
// mode, modulus and twiddle selection constant while rows of a routine are in
// flight.  Reading b and c late instead of delaying them, the bypass paths and
// all port assignments are this design's choices; the paper gives the
// topology and the unit list.
//
// Auxiliary path.  m_rd_* reads one row from the buffer, RF8 or RF1; one
// cycle later it is delivered as m_rd_to says.  Results of moves,
// automorphisms, decompositions and KS reads are written at a write-back
// pointer that wb_set loads and every written row advances; wb_count counts
// them.
module nmc_core
  import apache_pkg::*;
#(
  parameter int unsigned LANES    = 256,
  parameter int unsigned NPT      = 64,
  parameter int unsigned RF8_ROWS = 4096,
  parameter int unsigned RF1_ROWS = 512,
  parameter int unsigned BUF_ROWS = 12288,
  parameter int unsigned AROWS    = 32,
  parameter int unsigned ACOLS    = 64,
  parameter int unsigned N_AUTO   = 2,
  parameter int unsigned N_DEC    = 2,
  parameter int unsigned LMAX     = 8,
  parameter int unsigned KS_WORDS = 128,
  localparam int unsigned A8  = $clog2(RF8_ROWS),
  localparam int unsigned A1  = $clog2(RF1_ROWS),
  localparam int unsigned AB  = $clog2(BUF_ROWS),
  localparam int unsigned RW  = $clog2(2 * AROWS * ACOLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  modulus_t                m,
  // routine 1 and 2 issue
  input  row_ctl_t                r1,
  input  logic                    r1_inv,
  input  lane_mode_e              r1_mode,
  input  row_ctl_t                r2,
  // auxiliary path
  input  logic                    m_rd_en,
  input  space_e                  m_rd_sp,
  input  logic [15:0]             m_rd_addr,
  input  rd_to_e                  m_rd_to,
  input  logic [1:0]              m_unit,
  input  lane_mode_e              m_mode,
  input  logic                    wb_set,
  input  space_e                  wb_sp,
  input  logic [15:0]             wb_addr,
  output logic [15:0]             wb_count,
  input  logic                    auto_start,
  input  logic                    auto_ckks,
  input  logic [RW-1:0]           auto_rot,
  output logic                    auto_ready,
  input  logic [5:0]              dec_base,
  input  logic [3:0]              dec_levels,
  output logic                    dec_ready,
  output logic [LANES-1:0][W-1:0] ks_row,
  input  logic                    ks_rvalid,
  input  logic [KS_WORDS-1:0][W-1:0] ks_rdata,
  // data buffer, core side
  output logic                    buf_re,
  output logic [AB-1:0]           buf_raddr,
  input  logic [LANES-1:0][W-1:0] buf_rdata,
  output logic                    buf_we,
  output logic [AB-1:0]           buf_waddr,
  output logic [LANES-1:0][W-1:0] buf_wdata,
  // activity, for utilisation counters
  output logic                    ntt_busy,
  output logic                    r2_busy
);
  typedef logic [LANES-1:0][W-1:0] row_t;

  // ---------------- register files ----------------
  logic [4:0]       rf8_re;
  logic [4:0][A8-1:0] rf8_ra;
  row_t [4:0]       rf8_rd;
  logic [1:0]       rf8_we;
  logic [1:0][A8-1:0] rf8_wa;
  row_t [1:0]       rf8_wd;
  logic [3:0]       rf1_re;
  logic [3:0][A1-1:0] rf1_ra;
  row_t [3:0]       rf1_rd;
  logic [1:0]       rf1_we;
  logic [1:0][A1-1:0] rf1_wa;
  row_t [1:0]       rf1_wd;

  regfile #(.LANES(LANES), .ROWS(RF8_ROWS), .NR(5), .NW(2)) u_rf8 (
    .clk(clk), .re(rf8_re), .raddr(rf8_ra), .rdata(rf8_rd), .we(rf8_we), .waddr(rf8_wa), .wdata(rf8_wd));
  regfile #(.LANES(LANES), .ROWS(RF1_ROWS), .NR(4), .NW(2)) u_rf1 (
    .clk(clk), .re(rf1_re), .raddr(rf1_ra), .rdata(rf1_rd), .we(rf1_we), .waddr(rf1_wa), .wdata(rf1_wd));

  // ---------------- routine 1 control pipeline ----------------
  row_ctl_t s1 [R1_LAT];           // s1[k] = row issued k+1 cycles ago
  row_ctl_t s2 [R2_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < R1_LAT; k++) s1[k] <= '0;
      for (int k = 0; k < R2_LAT; k++) s2[k] <= '0;
    end else begin
      s1[0] <= r1;
      for (int k = 1; k < R1_LAT; k++) s1[k] <= s1[k-1];
      s2[0] <= r2;
      for (int k = 1; k < R2_LAT; k++) s2[k] <= s2[k-1];
    end
  end

  // ages (cycles after issue) at which each event happens
  localparam int unsigned AG_B  = NTT_LAT;            // 30: read b (and late a)
  localparam int unsigned AG_MM = NTT_LAT + 1;        // 31: MMult input
  localparam int unsigned AG_C  = NTT_LAT + MM_LAT;   // 34: read c
  localparam int unsigned AG_MA = AG_C + 1;           // 35: MAdd input
  // s1[k] has age k+1

  row_ctl_t t_b, t_mm, t_c, t_ma, t_wb;
  assign t_b  = s1[AG_B-1];
  assign t_mm = s1[AG_MM-1];
  assign t_c  = s1[AG_C-1];
  assign t_ma = s1[AG_MA-1];
  assign t_wb = s1[R1_LAT-1];

  // (I)NTT FU
  row_t ntt_out;
  logic ntt_ov;
  logic tw_load;
  ntt_fu #(.LANES(LANES), .NPT(NPT)) u_ntt (
    .clk(clk), .rst_n(rst_n), .mode(r1_mode), .m(m), .inverse(r1_inv),
    .tw_load(tw_load), .tw_row(rf8_rd[4]),
    .in_valid(s1[0].valid && s1[0].ntt_en), .din(rf8_rd[0]),
    .out_valid(ntt_ov), .dout(ntt_out));

  // routine 1 MMult / MAdd
  row_t mm1_a, mm1_z, ma1_z;
  assign mm1_a = t_mm.ntt_en ? ntt_out : rf8_rd[1];
  mmult_fu #(.LANES(LANES)) u_mm1 (.clk(clk), .mode(t_mm.mode), .en(t_mm.mm_en), .m(m),
                                   .a(mm1_a), .b(rf8_rd[2]), .z(mm1_z));
  madd_fu #(.LANES(LANES)) u_ma1 (.clk(clk), .mode(t_ma.mode), .op(ma_op_e'(t_ma.ma_op)), .p(m.p),
                                  .x(mm1_z), .y(rf8_rd[3]), .z(ma1_z));

  // routine 2 MMult / MAdd, fed by RF1 or, through the link, by the (I)NTT
  row_ctl_t u_mm2, u_ma2, u_wb2;
  assign u_mm2 = (t_mm.valid && t_mm.link) ? t_mm : s2[0];
  assign u_ma2 = (t_ma.valid && t_ma.link) ? t_ma : s2[MM_LAT];
  assign u_wb2 = (t_wb.valid && t_wb.link) ? t_wb : s2[R2_LAT-1];
  row_t mm2_a, mm2_z, ma2_z;
  assign mm2_a = (t_mm.valid && t_mm.link) ? ntt_out : rf1_rd[0];
  mmult_fu #(.LANES(LANES)) u_mm2u (.clk(clk), .mode(u_mm2.mode), .en(u_mm2.mm_en), .m(m),
                                    .a(mm2_a), .b(rf1_rd[1]), .z(mm2_z));
  madd_fu #(.LANES(LANES)) u_ma2u (.clk(clk), .mode(u_ma2.mode), .op(ma_op_e'(u_ma2.ma_op)), .p(m.p),
                                   .x(mm2_z), .y(rf1_rd[2]), .z(ma2_z));

  // ---------------- auxiliary path ----------------
  logic   m_rd_q;
  rd_to_e m_to_q;
  space_e m_sp_q;
  logic [1:0] m_unit_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_rd_q   <= 1'b0;
      m_to_q   <= TO_WB;
      m_sp_q   <= SP_BUF;
      m_unit_q <= '0;
    end else begin
      m_rd_q   <= m_rd_en;
      m_to_q   <= m_rd_to;
      m_sp_q   <= m_rd_sp;
      m_unit_q <= m_unit;
    end
  end
  row_t m_data;
  always_comb begin
    case (m_sp_q)
      SP_RF8:  m_data = rf8_rd[4];
      SP_RF1:  m_data = rf1_rd[3];
      default: m_data = buf_rdata;
    endcase
  end
  assign tw_load = m_rd_q && m_to_q == TO_TW;

  always_ff @(posedge clk)
    if (m_rd_q && m_to_q == TO_KS) ks_row <= m_data;

  // automorphism units
  logic [N_AUTO-1:0] a_ready, a_ov;
  row_t              a_out [N_AUTO];
  for (genvar u = 0; u < N_AUTO; u++) begin : g_auto
    logic a_busy, a_last;
    automorph #(.AROWS(AROWS), .ACOLS(ACOLS), .IO_W(LANES)) u_auto (
      .clk(clk), .rst_n(rst_n), .mode(m_mode), .p(m.p),
      .ld_valid(m_rd_q && m_to_q == TO_AUTO && 32'(m_unit_q) == u), .ld_data(m_data),
      .start(auto_start && 32'(m_unit) == u), .ckks(auto_ckks), .rot(auto_rot),
      .ready(a_ready[u]), .busy(a_busy), .out_valid(a_ov[u]), .out_last(a_last), .out_data(a_out[u]));
  end
  assign auto_ready = a_ready[m_unit[$clog2(N_AUTO)-1:0]];

  // decomposition units
  logic [N_DEC-1:0] d_ready, d_ov;
  row_t             d_out [N_DEC];
  for (genvar u = 0; u < N_DEC; u++) begin : g_dec
    logic [3:0] d_lvl;
    decomp #(.LANES(LANES), .LMAX(LMAX)) u_dec (
      .clk(clk), .rst_n(rst_n), .mode(m_mode), .p(m.p), .base_bits(dec_base), .levels(dec_levels),
      .in_valid(m_rd_q && m_to_q == TO_DEC && 32'(m_unit_q) == u), .din(m_data),
      .ready(d_ready[u]), .out_valid(d_ov[u]), .out_level(d_lvl), .dout(d_out[u]));
  end
  assign dec_ready = d_ready[m_unit[$clog2(N_DEC)-1:0]];

  // write-back of auxiliary results
  logic        wb_v;
  row_t        wb_d;
  space_e      wb_sp_q;
  logic [15:0] wb_ptr;
  always_comb begin
    wb_v = 1'b0;
    wb_d = m_data;
    if (m_rd_q && m_to_q == TO_WB) wb_v = 1'b1;
    for (int u = 0; u < N_AUTO; u++) if (a_ov[u]) begin wb_v = 1'b1; wb_d = a_out[u]; end
    for (int u = 0; u < N_DEC; u++)  if (d_ov[u]) begin wb_v = 1'b1; wb_d = d_out[u]; end
    if (ks_rvalid) begin
      wb_v = 1'b1;
      for (int k = 0; k < LANES; k++) wb_d[k] = (k < KS_WORDS) ? ks_rdata[k % KS_WORDS] : '0;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_sp_q  <= SP_RF8;
      wb_ptr   <= '0;
      wb_count <= '0;
    end else if (wb_set) begin
      wb_sp_q  <= wb_sp;
      wb_ptr   <= wb_addr;
      wb_count <= '0;
    end else if (wb_v) begin
      wb_ptr   <= wb_ptr + 16'd1;
      wb_count <= wb_count + 16'd1;
    end
  end

  // ---------------- register-file and buffer ports ----------------
  always_comb begin
    // RF8 reads: 0 a (via NTT), 1 a (late), 2 b, 3 c, 4 auxiliary
    rf8_re[0] = r1.valid && r1.ntt_en;             rf8_ra[0] = A8'(r1.a);
    rf8_re[1] = t_b.valid && !t_b.ntt_en;          rf8_ra[1] = A8'(t_b.a);
    rf8_re[2] = t_b.valid && !t_b.link;            rf8_ra[2] = A8'(t_b.b);
    rf8_re[3] = t_c.valid && !t_c.link;            rf8_ra[3] = A8'(t_c.c);
    rf8_re[4] = m_rd_en && m_rd_sp == SP_RF8;      rf8_ra[4] = A8'(m_rd_addr);
    // RF8 writes: 0 routine 1, 1 auxiliary
    rf8_we[0] = t_wb.valid && !t_wb.link;          rf8_wa[0] = A8'(t_wb.dst);  rf8_wd[0] = ma1_z;
    rf8_we[1] = wb_v && wb_sp_q == SP_RF8;         rf8_wa[1] = A8'(wb_ptr);    rf8_wd[1] = wb_d;
    // RF1 reads: 0 a, 1 b, 2 c (routine 2 or link rows), 3 auxiliary
    rf1_re[0] = r2.valid;                          rf1_ra[0] = A1'(r2.a);
    rf1_re[1] = r2.valid || (t_b.valid && t_b.link);
    rf1_ra[1] = (t_b.valid && t_b.link) ? A1'(t_b.b) : A1'(r2.b);
    rf1_re[2] = s2[MM_LAT-1].valid || (t_c.valid && t_c.link);
    rf1_ra[2] = (t_c.valid && t_c.link) ? A1'(t_c.c) : A1'(s2[MM_LAT-1].c);
    rf1_re[3] = m_rd_en && m_rd_sp == SP_RF1;      rf1_ra[3] = A1'(m_rd_addr);
    // RF1 writes: 0 routine 2 / link, 1 auxiliary
    rf1_we[0] = u_wb2.valid; rf1_wa[0] = A1'(u_wb2.dst); rf1_wd[0] = ma2_z;
    rf1_we[1] = wb_v && wb_sp_q == SP_RF1;         rf1_wa[1] = A1'(wb_ptr);    rf1_wd[1] = wb_d;
    // data buffer
    buf_re    = m_rd_en && m_rd_sp == SP_BUF;      buf_raddr = AB'(m_rd_addr);
    buf_we    = wb_v && wb_sp_q == SP_BUF;         buf_waddr = AB'(wb_ptr);    buf_wdata = wb_d;
  end

  assign ntt_busy = s1[0].valid && s1[0].ntt_en;
  assign r2_busy  = s2[0].valid;

  logic unused_ok;
  assign unused_ok = ^{ntt_ov, t_ma.valid, t_mm.valid};
endmodule
