// tb_cfg_madd: checks modular add, subtract, reverse subtract and pass in
// both lane modes against wide-integer reference arithmetic; the result must
// appear exactly one cycle after the operands.
module tb_cfg_madd;
  import apache_pkg::*;
  logic        clk = 0;
  lane_mode_e  mode;
  ma_op_e      op;
  logic [63:0] x, y, p, z, e;
  int checks = 0, failures = 0;

  localparam logic [63:0] P64 = 64'h3fffffffffffec81;
  localparam logic [31:0] P0  = 32'h3ffffe81;
  localparam logic [31:0] P1  = 32'h1fffff01;

  cfg_madd dut (.clk(clk), .mode(mode), .op(op), .x(x), .y(y), .p(p), .z(z));
  always #5 clk = ~clk;

  function automatic logic [63:0] ref1(ma_op_e o, logic [63:0] a, logic [63:0] b, logic [63:0] m);
    logic [65:0] t;
    case (o)
      MA_PASS: t = {2'b0, a};
      MA_ADD:  t = ({2'b0, a} + {2'b0, b}) % {2'b0, m};
      MA_SUB:  t = ({2'b0, a} + {2'b0, m} - {2'b0, b}) % {2'b0, m};
      default: t = ({2'b0, b} + {2'b0, m} - {2'b0, a}) % {2'b0, m};
    endcase
    return t[63:0];
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      mode = lane_mode_e'(i[0]);
      op   = ma_op_e'(i[2:1]);
      if (mode == MODE64) begin
        p = P64;
        x = {$urandom, $urandom} % P64;
        y = {$urandom, $urandom} % P64;
        if (i % 11 == 0) begin x = P64 - 1; y = P64 - 1; end
        e = ref1(op, x, y, p);
      end else begin
        p = {P1, P0};
        x = {$urandom % P1, $urandom % P0};
        y = {$urandom % P1, $urandom % P0};
        e = {ref1(op, {32'd0, x[63:32]}, {32'd0, y[63:32]}, {32'd0, P1})[31:0],
             ref1(op, {32'd0, x[31:0]},  {32'd0, y[31:0]},  {32'd0, P0})[31:0]};
      end
      @(posedge clk); #1;
      checks++;
      if (z !== e) begin
        failures++;
        if (failures < 5) $display("mismatch op=%0d mode=%0d x=%h y=%h z=%h e=%h", op, mode, x, y, z, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
