// ntt64: fully pipelined 64-point (I)NTT kernel, one 64-bit or two 32-bit lanes.
//
// Computes X[k] = sum_j x[j] * w^(j*k) mod p for a 64-word vector that enters
// in one cycle.  The structure is a radix-2 decimation-in-time network of
// six butterfly stages with 32 butterflies each.  Each butterfly multiplies
// its upper input by a twiddle factor in a configurable Barrett multiplier
// (cfg_mmult) while the lower input waits in a matching delay line, then a
// configurable modular adder and subtractor (cfg_madd) produce lo+t and lo-t.
// Building the (I)NTT out of the configurable MMult/MAdd circuits, so that it
// runs either as one 64-bit or as two parallel 32-bit transforms, follows the
// paper; the radix-2 DIT network and the port layout are this design's choice.
//
// tw[j] must hold w^j for j = 0..31, where w is a primitive 64th root of unity
// (in MODE2X32 each half holds its own lane's powers).  The inverse transform
// is obtained by giving the powers of w^-1; the scaling by 64^-1 is left to the
// following MMult stage.  The input is taken in natural order (the bit reversal
// of DIT is pure wiring) and the output is in natural order.
//
// Timing: one vector per cycle; out_valid follows in_valid by LAT = 30 cycles
// (6 stages x (4 multiplier + 1 adder cycles)).  mode, tw and m must stay
// constant while vectors are in flight.
module ntt64
  import apache_pkg::*;
#(
  parameter int unsigned NPT = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  lane_mode_e  mode,
  input  modulus_t    m,
  input  word_t       tw [NPT/2],
  input  logic        in_valid,
  input  word_t       din [NPT],
  output logic        out_valid,
  output word_t       dout [NPT]
);
  localparam int unsigned STAGES = $clog2(NPT);
  localparam int unsigned LAT    = STAGES * (MM_LAT + 1);

  function automatic int unsigned bitrev(int unsigned v);
    int unsigned r = 0;
    for (int b = 0; b < STAGES; b++) r |= ((v >> b) & 1) << (STAGES - 1 - b);
    return r;
  endfunction

  word_t d [STAGES+1][NPT];

  for (genvar i = 0; i < NPT; i++) begin : g_in
    assign d[0][i] = din[bitrev(i)];
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    localparam int unsigned HALF = 1 << s;
    for (genvar bf = 0; bf < NPT/2; bf++) begin : g_bf
      localparam int unsigned J   = bf % HALF;
      localparam int unsigned LO  = (bf / HALF) * 2 * HALF + J;
      localparam int unsigned HI  = LO + HALF;
      localparam int unsigned TWI = J * ((NPT/2) >> s);
      word_t t;
      word_t lo_dly [MM_LAT];
      cfg_mmult u_mul (.clk(clk), .mode(mode), .a(d[s][HI]), .b(tw[TWI]), .m(m), .z(t));
      always_ff @(posedge clk) begin
        lo_dly[0] <= d[s][LO];
        for (int k = 1; k < MM_LAT; k++) lo_dly[k] <= lo_dly[k-1];
      end
      cfg_madd u_add (.clk(clk), .mode(mode), .op(MA_ADD), .x(lo_dly[MM_LAT-1]), .y(t), .p(m.p), .z(d[s+1][LO]));
      cfg_madd u_sub (.clk(clk), .mode(mode), .op(MA_SUB), .x(lo_dly[MM_LAT-1]), .y(t), .p(m.p), .z(d[s+1][HI]));
    end
  end

  for (genvar i = 0; i < NPT; i++) begin : g_out
    assign dout[i] = d[STAGES][i];
  end

  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];
endmodule
