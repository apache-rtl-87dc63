// nmc_module: the near-memory computing module of one DIMM.
//
// Holds the interconnect controller, the NMC core and the data buffer, the
// three parts the paper lists.  The buffer is a row-wide array with two
// sides: the core side (moves between buffer and register files) and the
// external side, which stands for the data buses of the DIMM's DRAM ranks and
// for the host.  Key-switching commands leave the module towards the modified
// KS DRAM chips and their accumulator rows come back on ks_rvalid/ks_rdata.
//
// Timing: instructions are taken when instr_ready is high; busy stays high
// until the queue is empty and every pipeline has drained.  The external
// buffer port reads with one cycle of latency.
module nmc_module
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
  parameter int unsigned KS_WORDS = 128,
  localparam int unsigned AB      = $clog2(BUF_ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    instr_valid,
  input  instr_t                  instr,
  output logic                    instr_ready,
  output logic                    busy,
  input  logic                    ext_re,
  input  logic [AB-1:0]           ext_raddr,
  output logic [LANES-1:0][W-1:0] ext_rdata,
  input  logic                    ext_we,
  input  logic [AB-1:0]           ext_waddr,
  input  logic [LANES-1:0][W-1:0] ext_wdata,
  output logic [KS_CHIPS-1:0]     ks_valid,
  output ks_cmd_t                 ks_cmd,
  input  logic [KS_CHIPS-1:0]     ks_ready,
  input  logic                    ks_rvalid,
  input  logic [KS_WORDS-1:0][W-1:0] ks_rdata,
  output logic [7:0][31:0]        perf,
  output logic                    ntt_busy,
  output logic                    r2_busy
);
  localparam int unsigned RW = $clog2(2 * AROWS * ACOLS);
  typedef logic [LANES-1:0][W-1:0] row_t;

  modulus_t    m;
  row_ctl_t    r1, r2;
  logic        r1_inv;
  lane_mode_e  r1_mode, m_mode;
  logic        m_rd_en, wb_set, auto_start, auto_ckks, auto_ready, dec_ready;
  space_e      m_rd_sp, wb_sp;
  logic [15:0] m_rd_addr, wb_addr, wb_count;
  rd_to_e      m_rd_to;
  logic [1:0]  m_unit;
  logic [RW-1:0] auto_rot;
  logic [5:0]  dec_base;
  logic [3:0]  dec_levels;
  row_t        ks_row;
  logic        buf_re, buf_we;
  logic [AB-1:0] buf_raddr, buf_waddr;
  row_t        buf_rdata, buf_wdata;

  nmc_controller #(.LANES(LANES), .KS_CHIPS(KS_CHIPS), .KS_BANKS(KS_BANKS),
                   .AROWS(AROWS), .ACOLS(ACOLS)) u_ctrl (.*);

  nmc_core #(.LANES(LANES), .NPT(NPT), .RF8_ROWS(RF8_ROWS), .RF1_ROWS(RF1_ROWS), .BUF_ROWS(BUF_ROWS),
             .AROWS(AROWS), .ACOLS(ACOLS), .KS_WORDS(KS_WORDS)) u_core (.*);

  // data buffer: read port 0 / write port 0 core side, port 1 external side
  row_t [1:0] b_rd, b_wd;
  regfile #(.LANES(LANES), .ROWS(BUF_ROWS), .NR(2), .NW(2)) u_buf (
    .clk(clk), .re({ext_re, buf_re}), .raddr({ext_raddr, buf_raddr}), .rdata(b_rd),
    .we({ext_we, buf_we}), .waddr({ext_waddr, buf_waddr}), .wdata(b_wd));
  assign b_wd      = {ext_wdata, buf_wdata};
  assign buf_rdata = b_rd[0];
  assign ext_rdata = b_rd[1];
endmodule
