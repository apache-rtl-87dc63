// mmult_fu: row-wide modular multiplier functional unit.
//
// LANES configurable Barrett multipliers (cfg_mmult) work on one register-file
// row per cycle, so a row of LANES words (or 2*LANES 32-bit residues in
// MODE2X32) is multiplied element-wise by a second row.  When en is low the
// row passes through a delay line of the same latency instead, so a routine
// keeps a fixed latency whether or not it multiplies.  256 multipliers per FU
// and two FUs (one per routine) follow the paper; the bypass is this design's.
//
// Timing: one row per cycle, LAT = 4 cycles; en and mode travel with the row.
module mmult_fu
  import apache_pkg::*;
#(
  parameter int unsigned LANES = 256
) (
  input  logic                    clk,
  input  lane_mode_e              mode,
  input  logic                    en,
  input  modulus_t                m,
  input  logic [LANES-1:0][W-1:0] a,
  input  logic [LANES-1:0][W-1:0] b,
  output logic [LANES-1:0][W-1:0] z
);
  localparam int unsigned LAT = 4;
  logic [LANES-1:0][W-1:0] prod;
  logic [LANES-1:0][W-1:0] dly [LAT];
  logic [LAT-1:0]          en_d;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    cfg_mmult u_mm (.clk(clk), .mode(mode), .a(a[l]), .b(b[l]), .m(m), .z(prod[l]));
  end

  always_ff @(posedge clk) begin
    dly[0] <= a;
    en_d   <= {en_d[LAT-2:0], en};
    for (int k = 1; k < LAT; k++) dly[k] <= dly[k-1];
  end

  assign z = en_d[LAT-1] ? prod : dly[LAT-1];
endmodule
