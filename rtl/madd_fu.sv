// madd_fu: row-wide modular adder functional unit.
//
// LANES configurable modular adders (cfg_madd) combine a row x with a row y
// element-wise: pass, x+y, x-y or y-x mod p, one 64-bit or two 32-bit lanes
// per word.  256 adders per FU and two FUs follow the paper.
//
// Timing: one row per cycle, latency 1 cycle.
module madd_fu
  import apache_pkg::*;
#(
  parameter int unsigned LANES = 256
) (
  input  logic                    clk,
  input  lane_mode_e              mode,
  input  ma_op_e                  op,
  input  word_t                   p,
  input  logic [LANES-1:0][W-1:0] x,
  input  logic [LANES-1:0][W-1:0] y,
  output logic [LANES-1:0][W-1:0] z
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    cfg_madd u_ma (.clk(clk), .mode(mode), .op(op), .x(x[l]), .y(y[l]), .p(p), .z(z[l]));
  end
endmodule
