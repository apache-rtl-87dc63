// ks_dram: modified x8 DRAM chip of the key-switching ranks.
//
// The chip holds BANKS ks_bank instances (4 bank groups BG0..BG3 of 4 banks
// by default).  A command carries its bank number and is steered to that
// bank; KS_CLR goes to every bank.  Banks work independently, so while one
// bank waits on its row access the NMC can already send the next bit to
// another bank: bank-level parallelism hides the DRAM timing.  cmd_ready
// reports whether the addressed bank (for KS_CLR: all banks) can take a
// command this cycle.  The read MUX forwards whichever bank answers (the
// controller has at most one read outstanding per chip).  Key rows are
// preloaded through wr_*.  The chip's row/column decoders, drivers, FIFO and
// x8 DQ serialisation are not modelled; the read port is one page wide.
module ks_dram
  import apache_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned ROWS  = 8192,
  parameter int unsigned WORDS = 128,
  parameter int unsigned T_RCD = 22,
  parameter int unsigned T_CAS = 22,
  parameter int unsigned T_RP  = 22,
  localparam int unsigned AW   = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  input  ks_cmd_t                 cmd,
  output logic                    cmd_ready,
  input  logic                    wr_en,
  input  logic [3:0]              wr_bank,
  input  logic [AW-1:0]           wr_row,
  input  logic [WORDS-1:0][W-1:0] wr_data,
  output logic                    rvalid,
  output logic [WORDS-1:0][W-1:0] rdata,
  output logic [31:0]             acc_total
);
  logic [BANKS-1:0]                 b_ready, b_valid, b_rvalid;
  logic [BANKS-1:0][WORDS-1:0][W-1:0] b_rdata;
  logic [BANKS-1:0][31:0]           b_cnt;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    assign b_valid[b] = cmd_valid && (cmd.op == KS_CLR || 32'(cmd.bank) == b) &&
                        (cmd.op != KS_CLR || (&b_ready));
    ks_bank #(.ROWS(ROWS), .WORDS(WORDS), .T_RCD(T_RCD), .T_CAS(T_CAS), .T_RP(T_RP)) u_bank (
      .clk(clk), .rst_n(rst_n), .cmd_valid(b_valid[b]), .cmd(cmd), .cmd_ready(b_ready[b]),
      .wr_en(wr_en && 32'(wr_bank) == b), .wr_row(wr_row), .wr_data(wr_data),
      .rvalid(b_rvalid[b]), .rdata(b_rdata[b]), .acc_count(b_cnt[b]));
  end

  always_comb begin
    cmd_ready = (cmd.op == KS_CLR) ? (&b_ready) : b_ready[cmd.bank[$clog2(BANKS)-1:0]];
    rvalid    = |b_rvalid;
    rdata     = '0;
    acc_total = '0;
    for (int b = BANKS - 1; b >= 0; b--) begin
      if (b_rvalid[b]) rdata = b_rdata[b];
      acc_total += b_cnt[b];
    end
  end
endmodule
