// ntt_fu: (I)NTT functional unit, LANES/NPT pipelined NPT-point kernels.
//
// A register-file row of LANES words is cut into LANES/NPT vectors of NPT
// words, each transformed by its own ntt64 kernel in the same cycle (the
// paper's unit has four 64-point kernels for a 256-word row).  The unit holds
// two twiddle tables, loaded together from one row: words 0..NPT/2-1 are
// w^0..w^(NPT/2-1) for the forward transform and words NPT/2..NPT-1 the
// powers of w^-1 for the inverse one; `inverse` picks the table.  Larger
// transforms are composed from these kernels by the four-step method, with
// the inter-step twiddle multiplications done in the MMult FU.
//
// Timing: tw_load writes the tables at the clock edge; a row entering with
// in_valid leaves LAT = 30 cycles later with out_valid.  inverse, mode and m
// must not change while rows are in flight.
module ntt_fu
  import apache_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned NPT   = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  lane_mode_e              mode,
  input  modulus_t                m,
  input  logic                    inverse,
  input  logic                    tw_load,
  input  logic [LANES-1:0][W-1:0] tw_row,
  input  logic                    in_valid,
  input  logic [LANES-1:0][W-1:0] din,
  output logic                    out_valid,
  output logic [LANES-1:0][W-1:0] dout
);
  localparam int unsigned NK = LANES / NPT;

  word_t tw_fwd [NPT/2];
  word_t tw_inv [NPT/2];
  word_t tw_sel [NPT/2];

  always_ff @(posedge clk) begin
    if (tw_load) begin
      for (int j = 0; j < NPT/2; j++) begin
        tw_fwd[j] <= tw_row[j];
        tw_inv[j] <= tw_row[NPT/2 + j];
      end
    end
  end

  always_comb
    for (int j = 0; j < NPT/2; j++) tw_sel[j] = inverse ? tw_inv[j] : tw_fwd[j];

  logic [NK-1:0] kv;
  for (genvar k = 0; k < NK; k++) begin : g_kern
    word_t kin [NPT];
    word_t kout [NPT];
    for (genvar i = 0; i < NPT; i++) begin : g_w
      assign kin[i] = din[k*NPT + i];
      assign dout[k*NPT + i] = kout[i];
    end
    ntt64 #(.NPT(NPT)) u_ntt (
      .clk(clk), .rst_n(rst_n), .mode(mode), .m(m), .tw(tw_sel),
      .in_valid(in_valid), .din(kin), .out_valid(kv[k]), .dout(kout));
  end
  assign out_valid = kv[0];

  logic unused_ok;
  assign unused_ok = ^kv;
endmodule
