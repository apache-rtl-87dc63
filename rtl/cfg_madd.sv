// cfg_madd: configurable modular adder/subtractor, one 64-bit or two 32-bit lanes.
//
// Built from two cfg_addsub instances, as the paper suggests ("use the 64-bit
// configurable adder and subtractor to implement a configurable MAdd"): the
// first forms x+y (or x-y), the second the correction by p, and the lane's
// carry decides which of the two is the reduced result.  Operands must already
// be reduced (x, y < p).  op selects pass/add/sub/reverse-sub (ma_op_e).  In
// MODE2X32 p holds the two lane moduli in its halves.
//
// Timing: one register stage, result valid one cycle after the inputs.
module cfg_madd
  import apache_pkg::*;
(
  input  logic        clk,
  input  lane_mode_e  mode,
  input  ma_op_e      op,
  input  logic [63:0] x,
  input  logic [63:0] y,
  input  logic [63:0] p,
  output logic [63:0] z
);
  logic [63:0] a, b, s1, s2, r;
  logic [1:0]  c1, c2;
  logic        is_sub;

  always_comb begin
    is_sub = (op == MA_SUB) || (op == MA_RSUB);
    a      = (op == MA_RSUB) ? y : x;
    b      = (op == MA_RSUB) ? x : y;
  end

  // stage 1: x +/- y
  cfg_addsub u_first  (.mode(mode), .sub(is_sub),  .a(a),  .b(b), .s(s1), .cout(c1));
  // stage 2: subtract p after an add, add p back after a subtraction
  cfg_addsub u_second (.mode(mode), .sub(!is_sub), .a(s1), .b(p), .s(s2), .cout(c2));

  always_comb begin
    r = s1;
    if (mode == MODE64) begin
      if (!is_sub) begin
        if (c1[1] || c2[1]) r = s2;      // sum >= p
      end else begin
        if (!c1[1]) r = s2;              // borrow: add p
      end
    end else begin
      for (int l = 0; l < 2; l++) begin
        if (!is_sub) begin
          if (c1[l] || c2[l]) r[32*l +: 32] = s2[32*l +: 32];
        end else begin
          if (!c1[l]) r[32*l +: 32] = s2[32*l +: 32];
        end
      end
    end
    if (op == MA_PASS) r = x;
  end

  always_ff @(posedge clk) z <= r;
endmodule
