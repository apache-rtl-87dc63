// tb_karatsuba_mul: checks 64x64 products and two packed 32x32 products of
// the configurable Karatsuba multiplier against the built-in multiply.
module tb_karatsuba_mul;
  import apache_pkg::*;
  lane_mode_e   mode;
  logic [63:0]  a, b;
  logic [127:0] p, exp_p;
  int checks = 0, failures = 0;

  karatsuba_mul dut (.mode(mode), .a(a), .b(b), .p(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      mode = (i % 2) ? MODE2X32 : MODE64;
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (i < 4) begin a = '1; b = '1; end
      #1;
      if (mode == MODE64) exp_p = {64'd0, a} * {64'd0, b};
      else exp_p = {64'({32'd0, a[63:32]} * {32'd0, b[63:32]}), 64'({32'd0, a[31:0]} * {32'd0, b[31:0]})};
      checks++;
      if (p !== exp_p) begin
        failures++;
        if (failures < 5) $display("mismatch mode=%0d a=%h b=%h p=%h exp=%h", mode, a, b, p, exp_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
