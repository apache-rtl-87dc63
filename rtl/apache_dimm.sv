// apache_dimm: one APACHE DIMM, the top of this design.
//
// A DIMM carries one NMC module and, in one of its ranks, KS_CHIPS modified
// x8 DRAM chips whose banks accumulate key-switching key rows next to the
// sense amplifiers.  The NMC module computes everything that needs the
// (I)NTT, modular arithmetic, automorphism and decomposition; PubKS and
// PrivKS, whose keys are far too large to move, are reduced to a stream of
// n*t (PubKS) or p*(n+1)*t (PrivKS) bits that the controller sends to the KS
// chips, which return only the accumulated sums.  The standard DRAM chips of
// the other ranks are outside this RTL: their data buses, like the host,
// reach the data buffer through the ext_* port.  Evaluation keys are
// preloaded into the KS chips through key_*.
//
// One clock drives everything; the KS chips count their DRAM timing
// (tRCD-tCAS-tRP) in cycles of it.
module apache_dimm
  import apache_pkg::*;
#(
  parameter int unsigned LANES    = 256,
  parameter int unsigned NPT      = 64,
  parameter int unsigned RF8_ROWS = 4096,
  parameter int unsigned RF1_ROWS = 512,
  parameter int unsigned BUF_ROWS = 12288,
  parameter int unsigned AROWS    = 32,
  parameter int unsigned ACOLS    = 64,
  parameter int unsigned KS_CHIPS = 4,
  parameter int unsigned KS_BANKS = 16,
  parameter int unsigned KS_ROWS  = 8192,
  parameter int unsigned KS_WORDS = 128,
  parameter int unsigned T_RCD    = 22,
  parameter int unsigned T_CAS    = 22,
  parameter int unsigned T_RP     = 22,
  localparam int unsigned AB      = $clog2(BUF_ROWS),
  localparam int unsigned KAW     = $clog2(KS_ROWS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       instr_valid,
  input  instr_t                     instr,
  output logic                       instr_ready,
  output logic                       busy,
  input  logic                       ext_re,
  input  logic [AB-1:0]              ext_raddr,
  output logic [LANES-1:0][W-1:0]    ext_rdata,
  input  logic                       ext_we,
  input  logic [AB-1:0]              ext_waddr,
  input  logic [LANES-1:0][W-1:0]    ext_wdata,
  input  logic                       key_we,
  input  logic [1:0]                 key_chip,
  input  logic [3:0]                 key_bank,
  input  logic [KAW-1:0]             key_row,
  input  logic [KS_WORDS-1:0][W-1:0] key_data,
  output logic [7:0][31:0]           perf,
  output logic [31:0]                ks_acc_total,
  output logic                       ntt_busy,
  output logic                       r2_busy
);
  logic [KS_CHIPS-1:0] ks_valid, ks_ready, c_rvalid;
  ks_cmd_t             ks_cmd;
  logic [KS_CHIPS-1:0][KS_WORDS-1:0][W-1:0] c_rdata;
  logic [KS_CHIPS-1:0][31:0] c_total;
  logic                ks_rvalid;
  logic [KS_WORDS-1:0][W-1:0] ks_rdata;

  nmc_module #(.LANES(LANES), .NPT(NPT), .RF8_ROWS(RF8_ROWS), .RF1_ROWS(RF1_ROWS), .BUF_ROWS(BUF_ROWS),
               .AROWS(AROWS), .ACOLS(ACOLS), .KS_CHIPS(KS_CHIPS), .KS_BANKS(KS_BANKS),
               .KS_WORDS(KS_WORDS)) u_nmc (.*);

  for (genvar c = 0; c < KS_CHIPS; c++) begin : g_ks
    ks_dram #(.BANKS(KS_BANKS), .ROWS(KS_ROWS), .WORDS(KS_WORDS),
              .T_RCD(T_RCD), .T_CAS(T_CAS), .T_RP(T_RP)) u_chip (
      .clk(clk), .rst_n(rst_n), .cmd_valid(ks_valid[c]), .cmd(ks_cmd), .cmd_ready(ks_ready[c]),
      .wr_en(key_we && 32'(key_chip) == c), .wr_bank(key_bank), .wr_row(key_row), .wr_data(key_data),
      .rvalid(c_rvalid[c]), .rdata(c_rdata[c]), .acc_total(c_total[c]));
  end

  always_comb begin
    ks_rvalid    = |c_rvalid;
    ks_rdata     = '0;
    ks_acc_total = '0;
    for (int c = KS_CHIPS - 1; c >= 0; c--) begin
      if (c_rvalid[c]) ks_rdata = c_rdata[c];
      ks_acc_total += c_total[c];
    end
  end
endmodule
