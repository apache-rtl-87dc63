// regfile: row-wide multi-port memory used for the register files and the
// data buffer of the NMC module.
//
// Each row holds LANES 64-bit words, so one row feeds the whole LANES-wide
// datapath in one cycle.  The array has NR read ports and NW write ports.
// Reads are synchronous: rdata[i] shows row raddr[i] one cycle after re[i].
// Writes take effect at the clock edge; if two write ports hit the same row
// in one cycle the higher-numbered port wins.  A read of a row being written
// in the same cycle returns the old contents.  The capacities (8 MB and 1 MB
// register files, 24 MB data buffer) follow the paper; the port count, the
// row organisation and the read latency are this design's choices.
module regfile
  import apache_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned NR    = 4,
  parameter int unsigned NW    = 2,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                        clk,
  input  logic [NR-1:0]               re,
  input  logic [NR-1:0][AW-1:0]       raddr,
  output logic [NR-1:0][LANES-1:0][W-1:0] rdata,
  input  logic [NW-1:0]               we,
  input  logic [NW-1:0][AW-1:0]       waddr,
  input  logic [NW-1:0][LANES-1:0][W-1:0] wdata
);
  logic [LANES-1:0][W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NR; i++)
      if (re[i]) rdata[i] <= mem[raddr[i]];
    for (int j = 0; j < NW; j++)
      if (we[j]) mem[waddr[j]] <= wdata[j];
  end
endmodule
