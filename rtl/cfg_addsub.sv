// cfg_addsub: 64-bit adder/subtractor that splits into two 32-bit ones.
//
// In MODE64 it computes a + b or a - b over 64 bits.  In MODE2X32 the carry
// from bit 31 into bit 32 is cut, so the two halves are independent 32-bit
// adders/subtractors; this "cut at the carry bit" follows the paper.  cout[i]
// is the carry out of lane i (for MODE64 only cout[1] is meaningful and is the
// 64-bit carry).  For a subtraction a carry of 1 means no borrow, i.e. a >= b.
// Combinational.
module cfg_addsub
  import apache_pkg::*;
(
  input  lane_mode_e  mode,
  input  logic        sub,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] s,
  output logic [1:0]  cout
);
  logic [63:0] bx;
  logic [32:0] lo, hi;
  logic        cin_hi;

  always_comb begin
    bx      = sub ? ~b : b;
    lo      = {1'b0, a[31:0]} + {1'b0, bx[31:0]} + {32'd0, sub};
    cin_hi  = (mode == MODE64) ? lo[32] : sub;
    hi      = {1'b0, a[63:32]} + {1'b0, bx[63:32]} + {32'd0, cin_hi};
    s       = {hi[31:0], lo[31:0]};
    cout    = {hi[32], lo[32]};
  end
endmodule
