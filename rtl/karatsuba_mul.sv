// karatsuba_mul: configurable 64-bit Karatsuba multiplier.
//
// A 64x64 product is built from three 32-bit-class sub-multipliers, as in
// Karatsuba's method: z0 = a0*b0, z2 = a1*b1 and z1 = (a0+a1)*(b0+b1) - z0 - z2
// (the middle one is 33x33 bits), then p = z2<<64 + z1<<32 + z0.  In MODE2X32
// the same hardware gives two independent 32x32 products: z0 is lane 0
// (low halves) and z2 is lane 1 (high halves), the middle multiplier's
// operands are forced to zero, and the output is {lane1 product, lane0
// product}.  Reusing a Karatsuba multiplier this way follows the paper; the
// packing of the two lanes is this design's choice.
//
// Purely combinational; the caller registers the result.
module karatsuba_mul
  import apache_pkg::*;
(
  input  lane_mode_e   mode,
  input  logic [63:0]  a,
  input  logic [63:0]  b,
  output logic [127:0] p
);
  logic [63:0]  z0, z2;
  logic [32:0]  sa, sb;
  logic [65:0]  zm;
  logic [65:0]  z1;

  always_comb begin
    z0 = {32'd0, a[31:0]}  * {32'd0, b[31:0]};
    z2 = {32'd0, a[63:32]} * {32'd0, b[63:32]};
    sa = (mode == MODE64) ? ({1'b0, a[31:0]} + {1'b0, a[63:32]}) : 33'd0;
    sb = (mode == MODE64) ? ({1'b0, b[31:0]} + {1'b0, b[63:32]}) : 33'd0;
    zm = {33'd0, sa} * {33'd0, sb};
    z1 = zm - {2'b00, z0} - {2'b00, z2};
    if (mode == MODE64)
      p = {z2, 64'd0} + {30'd0, z1, 32'd0} + {64'd0, z0};
    else
      p = {z2, z0};
  end
endmodule
