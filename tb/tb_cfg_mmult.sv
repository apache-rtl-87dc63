// tb_cfg_mmult: streams one random product per cycle through the Barrett
// multiplier in both lane modes and compares every result, taken exactly
// four cycles after its operands, with a*b mod p from wide-integer arithmetic.
module tb_cfg_mmult;
  import apache_pkg::*;
  logic        clk = 0;
  lane_mode_e  mode;
  logic [63:0] a, b, z;
  modulus_t    m;
  int checks = 0, failures = 0;

  localparam int LAT = 4;
  localparam logic [63:0] P64 = 64'h3fffffffffffec81;
  localparam logic [63:0] U64 = 64'h400000000000137f;
  localparam logic [31:0] P0  = 32'h3ffffe81, U0 = 32'h4000017f;
  localparam logic [31:0] P1  = 32'h1fffff01, U1 = 32'h200000ff;

  logic [63:0] exp_q [$];
  cfg_mmult dut (.clk(clk), .mode(mode), .a(a), .b(b), .m(m), .z(z));
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(lane_mode_e md, int n);
    logic [127:0] r;
    logic [63:0]  e, l0, l1;
    mode = md;
    if (md == MODE64) begin m.p = P64; m.u = U64; m.k_lo = 7'd62; m.k_hi = 7'd62; end
    else begin m.p = {P1, P0}; m.u = {U1, U0}; m.k_lo = 7'd30; m.k_hi = 7'd29; end
    exp_q.delete();
    for (int i = 0; i < n + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        checks++;
        if (z !== exp_q[0]) begin
          failures++;
          if (failures < 5) $display("mismatch mode=%0d z=%h exp=%h", md, z, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      if (md == MODE64) begin
        a = {$urandom, $urandom} % P64;
        b = {$urandom, $urandom} % P64;
        if (i == 0) begin a = P64 - 1; b = P64 - 1; end
        r = ({64'd0, a} * {64'd0, b}) % {64'd0, P64};
        e = r[63:0];
      end else begin
        a = {$urandom % P1, $urandom % P0};
        b = {$urandom % P1, $urandom % P0};
        if (i == 0) begin a = {P1 - 1, P0 - 1}; b = a; end
        l0 = ({32'd0, a[31:0]}  * {32'd0, b[31:0]})  % {32'd0, P0};
        l1 = ({32'd0, a[63:32]} * {32'd0, b[63:32]}) % {32'd0, P1};
        e = {l1[31:0], l0[31:0]};
      end
      exp_q.push_back(e);
    end
  endtask

  initial begin
    run(MODE64, 1500);
    run(MODE2X32, 1500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
