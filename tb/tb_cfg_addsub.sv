// tb_cfg_addsub: checks the divisible adder/subtractor in both lane modes,
// including the carries, against independent wide arithmetic.
module tb_cfg_addsub;
  import apache_pkg::*;
  lane_mode_e  mode;
  logic        sub;
  logic [63:0] a, b, s;
  logic [1:0]  cout;
  logic [64:0] e64;
  logic [32:0] e0, e1;
  int checks = 0, failures = 0;

  cfg_addsub dut (.mode(mode), .sub(sub), .a(a), .b(b), .s(s), .cout(cout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      mode = lane_mode_e'(i[0]);
      sub  = i[1];
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (i % 7 == 0) a[31:0] = '1;   // force carries at the lane boundary
      #1;
      checks++;
      if (mode == MODE64) begin
        e64 = sub ? {1'b0, a} + {1'b0, ~b} + 65'd1 : {1'b0, a} + {1'b0, b};
        if (s !== e64[63:0] || cout[1] !== e64[64]) failures++;
      end else begin
        e0 = sub ? {1'b0, a[31:0]} + {1'b0, ~b[31:0]} + 33'd1 : {1'b0, a[31:0]} + {1'b0, b[31:0]};
        e1 = sub ? {1'b0, a[63:32]} + {1'b0, ~b[63:32]} + 33'd1 : {1'b0, a[63:32]} + {1'b0, b[63:32]};
        if (s !== {e1[31:0], e0[31:0]} || cout !== {e1[32], e0[32]}) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
