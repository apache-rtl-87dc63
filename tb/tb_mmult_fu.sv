// tb_mmult_fu: streams random row pairs through the MMult FU, one per cycle,
// in 64-bit and then 2x32-bit mode and with the multiplier bypassed, and checks
// that every result is a*b mod p (or a when bypassed) exactly 4 cycles after
// its operands.
module tb_mmult_fu;
  import apache_pkg::*;
  localparam int LANES = 4, NOP = 200, LAT = 4;
  localparam logic [63:0] P64 = 64'h3fffffffffffec81, U64 = 64'h400000000000137f;
  localparam logic [31:0] P0 = 32'h3ffffe81, U0 = 32'h4000017f;
  localparam logic [31:0] P1 = 32'h1fffff01, U1 = 32'h200000ff;
  typedef logic [LANES-1:0][W-1:0] row_t;
  logic clk = 0;
  lane_mode_e mode;
  logic en;
  modulus_t m;
  row_t a, b, z;
  row_t e_pipe [NOP + LAT];
  int checks = 0, failures = 0;

  mmult_fu #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] mulmod(logic [63:0] x, logic [63:0] y, logic [63:0] q);
    logic [127:0] r = ({64'd0, x} * {64'd0, y}) % {64'd0, q};
    return r[63:0];
  endfunction

  task automatic run(lane_mode_e md);
    mode = md;
    if (md == MODE64) begin m.p = P64; m.u = U64; m.k_lo = 7'd62; m.k_hi = 7'd62; end
    else begin m.p = {P1, P0}; m.u = {U1, U0}; m.k_lo = 7'd30; m.k_hi = 7'd29; end
    for (int it = 0; it < NOP + LAT; it++) begin
      @(negedge clk);
      if (it >= LAT) begin
        checks++;
        if (z !== e_pipe[it - LAT]) begin
          failures++;
          if (failures < 6) $display("op %0d got %h exp %h", it - LAT, z, e_pipe[it - LAT]);
        end
      end
      if (it < NOP) begin
        en = (it % 4 != 3);
        for (int k = 0; k < LANES; k++) begin
          if (mode == MODE64) begin
            a[k] = {$urandom, $urandom} % P64; b[k] = {$urandom, $urandom} % P64;
            if (it % 9 == 0) begin a[k] = P64 - 1; b[k] = P64 - 1; end
            e_pipe[it][k] = en ? mulmod(a[k], b[k], P64) : a[k];
          end else begin
            a[k] = {32'($urandom % P1), 32'($urandom % P0)}; b[k] = {32'($urandom % P1), 32'($urandom % P0)};
            e_pipe[it][k] = en ? {mulmod({32'd0, a[k][63:32]}, {32'd0, b[k][63:32]}, {32'd0, P1})[31:0],
                                  mulmod({32'd0, a[k][31:0]},  {32'd0, b[k][31:0]},  {32'd0, P0})[31:0]} : a[k];
          end
        end
      end
    end
  endtask

  initial begin
    en = 1; a = '0; b = '0;
    run(MODE64);
    run(MODE2X32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
