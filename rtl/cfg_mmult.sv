// cfg_mmult: configurable pipelined Barrett modular multiplier.
//
// Computes z = a*b mod p for one 64-bit lane (MODE64) or two 32-bit lanes
// (MODE2X32, operands and moduli packed in the word halves).  Following the
// paper's figure, three configurable Karatsuba multipliers are chained, each
// followed by a register:
//   stage 1: x = a*b
//   stage 2: v = (x >> (k-1)) * u          with u = floor(2^(2k)/p)
//   stage 3: w = q*p                       with q = v >> (k+1)
//   stage 4: r = x - w, then r-p and r-2p in parallel; two comparisons (the
//            carries of the subtractors) pick the one in [0, p).
// Barrett reduction is this design's reading of the multiplier chain a*b, *u,
// *p and the two CMP blocks that the figure prints.  r < 3p, so p must be at
// most 62 bits in MODE64 and 30 bits per lane in MODE2X32; k is the bit length
// of p (k_lo for lane 0 / the 64-bit lane, k_hi for lane 1).
//
// Timing: fully pipelined, one product per cycle, latency LAT = 4 cycles.
// `mode` is carried along the pipeline; the modulus set must stay constant
// while products are in flight.
module cfg_mmult
  import apache_pkg::*;
(
  input  logic        clk,
  input  lane_mode_e  mode,
  input  logic [63:0] a,
  input  logic [63:0] b,
  input  modulus_t    m,
  output logic [63:0] z
);
  localparam int unsigned LAT = 4;

  lane_mode_e   mode1, mode2, mode3;
  logic [127:0] x_c, v_c, w_c;
  logic [127:0] x1, x2, x3;
  logic [127:0] v2;
  logic [63:0]  w3;
  logic [63:0]  xs, q;

  // stage 1
  karatsuba_mul u_mul_ab (.mode(mode), .a(a), .b(b), .p(x_c));
  always_ff @(posedge clk) begin
    x1    <= x_c;
    mode1 <= mode;
  end

  // stage 2: shifted product times u
  always_comb begin
    if (mode1 == MODE64) begin
      xs = 64'(x1 >> (m.k_lo - 1));
    end else begin
      xs[31:0]  = 32'(x1[63:0]   >> (m.k_lo - 1));
      xs[63:32] = 32'(x1[127:64] >> (m.k_hi - 1));
    end
  end
  karatsuba_mul u_mul_u (.mode(mode1), .a(xs), .b(m.u), .p(v_c));
  always_ff @(posedge clk) begin
    v2    <= v_c;
    x2    <= x1;
    mode2 <= mode1;
  end

  // stage 3: quotient estimate times p
  always_comb begin
    if (mode2 == MODE64) begin
      q = 64'(v2 >> (m.k_lo + 1));
    end else begin
      q[31:0]  = 32'(v2[63:0]   >> (m.k_lo + 1));
      q[63:32] = 32'(v2[127:64] >> (m.k_hi + 1));
    end
  end
  karatsuba_mul u_mul_p (.mode(mode2), .a(q), .b(m.p), .p(w_c));
  always_ff @(posedge clk) begin
    w3    <= (mode2 == MODE64) ? w_c[63:0] : {w_c[95:64], w_c[31:0]};
    x3    <= x2;
    mode3 <= mode2;
  end

  // stage 4: remainder and final corrections
  logic [63:0] xl, r, r1, r2, p2, res;
  logic [1:0]  c0, c1, c2;
  always_comb begin
    xl = (mode3 == MODE64) ? x3[63:0] : {x3[95:64], x3[31:0]};
    p2 = m.p << 1;
  end
  cfg_addsub u_sub_r  (.mode(mode3), .sub(1'b1), .a(xl), .b(w3),  .s(r),  .cout(c0));
  cfg_addsub u_sub_p  (.mode(mode3), .sub(1'b1), .a(r),  .b(m.p), .s(r1), .cout(c1));
  cfg_addsub u_sub_2p (.mode(mode3), .sub(1'b1), .a(r),  .b(p2),  .s(r2), .cout(c2));
  always_comb begin
    if (mode3 == MODE64) begin
      res = c2[1] ? r2 : (c1[1] ? r1 : r);
    end else begin
      for (int l = 0; l < 2; l++)
        res[32*l +: 32] = c2[l] ? r2[32*l +: 32] : (c1[l] ? r1[32*l +: 32] : r[32*l +: 32]);
    end
  end
  always_ff @(posedge clk) z <= res;

  logic unused_ok;
  assign unused_ok = ^{c0, w_c[127:96], w_c[63:32]};
endmodule
