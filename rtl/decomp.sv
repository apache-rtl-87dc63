// decomp: signed gadget decomposition unit.
//
// Splits every coefficient of a row into L signed digits of beta bits, the
// operation TFHE's external product needs before the (I)NTT.  A coefficient
// is a torus value of Q bits: Q = 64 in MODE64, and in MODE2X32 each 32-bit
// half is its own Q = 32 value.  The value is rounded to its top L*beta bits
// and an offset of 2^(beta-1) per digit is added, so that each digit is a
// plain bit field:  d_i = ((a + off) >> (Q - i*beta)) mod 2^beta - 2^(beta-1),
// i = 1 (most significant) .. L, with |d_i| <= 2^(beta-1) and
// sum_i d_i * 2^(Q - i*beta) = a rounded to L*beta bits.  Negative digits are
// given as p + d_i (per lane modulus), ready for the (I)NTT.  The paper only
// names this unit; the offset method is the usual TFHE one and this design's
// choice.  L*beta must be below Q and 1 <= L <= LMAX.
//
// Timing: a row is taken with in_valid when ready is high; level i appears on
// dout i cycles later with out_valid and out_level = i; ready returns with the
// last level, so rows can follow each other every L cycles.
module decomp
  import apache_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned LMAX  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  lane_mode_e              mode,
  input  word_t                   p,
  input  logic [5:0]              base_bits,
  input  logic [3:0]              levels,
  input  logic                    in_valid,
  input  logic [LANES-1:0][W-1:0] din,
  output logic                    ready,
  output logic                    out_valid,
  output logic [3:0]              out_level,
  output logic [LANES-1:0][W-1:0] dout
);
  logic [LANES-1:0][W-1:0] v;
  lane_mode_e              mode_q;
  logic [3:0]              lvl;       // next level to emit, 0 = idle

  // offset for Q-bit torus values
  function automatic logic [63:0] offset(int unsigned q, int unsigned beta, int unsigned l);
    logic [63:0] o;
    o = 0;
    if (q > l * beta) o = 64'd1 << (q - l * beta - 1);
    for (int unsigned i = 1; i <= LMAX; i++)
      if (i <= l) o = o + ((64'd1 << (beta - 1)) << (q - i * beta));
    return o;
  endfunction

  logic [63:0] off64, off32;
  always_comb begin
    off64 = offset(64, 32'(base_bits), 32'(levels));
    off32 = offset(32, 32'(base_bits), 32'(levels));
  end

  assign ready = (lvl == 4'd0) || (lvl == levels);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lvl       <= 4'd0;
      out_valid <= 1'b0;
      out_level <= 4'd0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && ready) begin
        lvl <= 4'd1;
      end else if (lvl != 4'd0) begin
        if (lvl == levels) lvl <= 4'd0;
        else lvl <= lvl + 4'd1;
      end
      if (lvl != 4'd0) begin
        out_valid <= 1'b1;
        out_level <= lvl;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && ready) begin
      mode_q <= mode;
      for (int l = 0; l < LANES; l++)
        v[l] <= (mode == MODE64) ? din[l] + off64
                                 : {din[l][63:32] + off32[31:0], din[l][31:0] + off32[31:0]};
    end
  end

  // digit extraction for the level being emitted
  function automatic logic [31:0] digit_res(logic [63:0] val, int unsigned q, int unsigned beta,
                                            int unsigned i, logic [63:0] pm);
    logic [63:0] f, d;
    f = (val >> (q - i * beta)) & ((64'd1 << beta) - 1);
    // d = f - 2^(beta-1) as a residue mod pm
    if (f >= (64'd1 << (beta - 1))) d = f - (64'd1 << (beta - 1));
    else d = pm - ((64'd1 << (beta - 1)) - f);
    return d[31:0];
  endfunction

  function automatic logic [63:0] digit64(logic [63:0] val, int unsigned beta, int unsigned i, logic [63:0] pm);
    logic [63:0] f;
    f = (val >> (64 - i * beta)) & ((64'd1 << beta) - 1);
    if (f >= (64'd1 << (beta - 1))) return f - (64'd1 << (beta - 1));
    return pm - ((64'd1 << (beta - 1)) - f);
  endfunction

  always_ff @(posedge clk) begin
    if (lvl != 4'd0) begin
      for (int l = 0; l < LANES; l++) begin
        if (mode_q == MODE64)
          dout[l] <= digit64(v[l], 32'(base_bits), 32'(lvl), p);
        else
          dout[l] <= {digit_res({32'd0, v[l][63:32]}, 32, 32'(base_bits), 32'(lvl), {32'd0, p[63:32]}),
                      digit_res({32'd0, v[l][31:0]},  32, 32'(base_bits), 32'(lvl), {32'd0, p[31:0]})};
      end
    end
  end
endmodule
