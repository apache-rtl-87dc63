// tb_madd_fu: streams random rows through the MAdd FU in both lane modes and
// with every operation, one row per cycle, and checks each result one cycle
// later against modular add / subtract / reverse subtract / pass-through.
module tb_madd_fu;
  import apache_pkg::*;
  localparam int LANES = 4, NOP = 300;
  localparam logic [63:0] P64 = 64'h3fffffffffffec81;
  localparam logic [31:0] P0 = 32'h3ffffe81, P1 = 32'h1fffff01;
  typedef logic [LANES-1:0][W-1:0] row_t;
  logic clk = 0;
  lane_mode_e mode;
  ma_op_e op;
  word_t p;
  row_t x, y, z, e_q;
  logic v_q = 0;
  int checks = 0, failures = 0;

  madd_fu #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] f1(ma_op_e o, logic [63:0] a, logic [63:0] b, logic [63:0] q);
    case (o)
      MA_PASS: return a;
      MA_ADD:  return (a + b) % q;
      MA_SUB:  return (a >= b) ? a - b : a + q - b;
      default: return (b >= a) ? b - a : b + q - a;
    endcase
  endfunction

  initial begin
    mode = MODE64; op = MA_PASS; p = P64; x = '0; y = '0; e_q = '0;
    for (int it = 0; it < NOP; it++) begin
      row_t e;
      @(negedge clk);
      if (v_q) begin
        checks++;
        if (z !== e_q) begin failures++; if (failures < 6) $display("it %0d got %h exp %h", it, z, e_q); end
      end
      mode = (it < NOP / 2) ? MODE64 : MODE2X32;
      op = ma_op_e'($urandom % 4);
      p = (mode == MODE64) ? P64 : {P1, P0};
      for (int k = 0; k < LANES; k++) begin
        if (mode == MODE64) begin
          x[k] = {$urandom, $urandom} % P64; y[k] = {$urandom, $urandom} % P64;
          if (it % 5 == 0) begin x[k] = P64 - 1; y[k] = P64 - 1; end
          e[k] = f1(op, x[k], y[k], P64);
        end else begin
          x[k] = {32'($urandom % P1), 32'($urandom % P0)}; y[k] = {32'($urandom % P1), 32'($urandom % P0)};
          e[k] = {f1(op, {32'd0, x[k][63:32]}, {32'd0, y[k][63:32]}, {32'd0, P1})[31:0],
                  f1(op, {32'd0, x[k][31:0]},  {32'd0, y[k][31:0]},  {32'd0, P0})[31:0]};
        end
      end
      e_q = e; v_q = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
