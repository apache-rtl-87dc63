// tb_decomp: feeds rows of random torus coefficients to the decomposition
// unit, back to back, for several (base, levels) settings in both lane modes.
// Each digit row is compared with a reference decomposition computed by the
// textbook carry method (take the rounded top L*beta bits, peel digits from
// the least significant end, carry when a digit reaches 2^(beta-1)), and the
// digits must arrive one per cycle starting one cycle after the row.
module tb_decomp;
  import apache_pkg::*;
  localparam int LANES = 8;
  localparam logic [63:0] P64 = 64'h3fffffffffffec81;
  localparam logic [31:0] P0 = 32'h3ffffe81, P1 = 32'h1fffff01;
  logic clk = 0, rst_n = 0;
  lane_mode_e mode;
  word_t p;
  logic [5:0] base_bits;
  logic [3:0] levels;
  logic in_valid, ready, out_valid;
  logic [3:0] out_level;
  logic [LANES-1:0][W-1:0] din, dout;
  int checks = 0, failures = 0, cyc = 0;

  decomp #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: signed digits of a Q-bit value, level 1 first, as residues mod pm
  function automatic logic [63:0] ref_digit(logic [63:0] a, int q, int beta, int l, int lev, logic [63:0] pm);
    logic [127:0] t;
    longint d [16];
    int carry;
    t = ({64'd0, a} + ((q > l * beta) ? (128'd1 << (q - l * beta - 1)) : 128'd0)) >> (q - l * beta);
    t = t & ((128'd1 << (l * beta)) - 1);
    carry = 0;
    for (int i = l; i >= 1; i--) begin
      longint x;
      x = longint'(t & ((128'd1 << beta) - 1)) + carry;
      t = t >> beta;
      if (x >= (longint'(1) << (beta - 1))) begin x = x - (longint'(1) << beta); carry = 1; end
      else carry = 0;
      d[i] = x;
    end
    if (d[lev] < 0) return pm - 64'(-d[lev]);
    return 64'(d[lev]);
  endfunction

  task automatic run(lane_mode_e md, int beta, int l, int rows);
    logic [LANES-1:0][W-1:0] q [$];
    int issued = 0, got = 0, t_in [$];
    mode = md; base_bits = 6'(beta); levels = 4'(l);
    p = (md == MODE64) ? P64 : {P1, P0};
    fork
      begin
        while (issued < rows) begin
          logic [LANES-1:0][W-1:0] r;
          for (int k = 0; k < LANES; k++) r[k] = {$urandom, $urandom};
          @(negedge clk);
          in_valid = 1; din = r;
          #1;
          while (!ready) begin @(negedge clk); end
          q.push_back(r); t_in.push_back(cyc);
          @(posedge clk);
          issued++;
          #1 in_valid = 0;
        end
      end
      begin
        while (got < rows * l) begin
          @(posedge clk); #2;
          if (out_valid) begin
            int lev = int'(out_level);
            checks++;
            if (lev != (got % l) + 1) failures++;
            checks++;
            if (cyc - t_in[0] - 1 != lev) begin failures++; $display("lat %0d lev %0d", cyc - t_in[0], lev); end
            for (int k = 0; k < LANES; k++) begin
              logic [63:0] e;
              if (md == MODE64) e = ref_digit(q[0][k], 64, beta, l, lev, P64);
              else e = {ref_digit({32'd0, q[0][k][63:32]}, 32, beta, l, lev, {32'd0, P1})[31:0],
                        ref_digit({32'd0, q[0][k][31:0]},  32, beta, l, lev, {32'd0, P0})[31:0]};
              checks++;
              if (dout[k] !== e) begin
                failures++;
                if (failures < 6) $display("lev %0d lane %0d got %h exp %h", lev, k, dout[k], e);
              end
            end
            got++;
            if (lev == l) begin void'(q.pop_front()); void'(t_in.pop_front()); end
          end
        end
      end
    join
  endtask

  initial begin
    in_valid = 0; din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(MODE64, 8, 4, 20);
    run(MODE64, 10, 6, 20);
    run(MODE64, 16, 3, 10);
    run(MODE2X32, 8, 2, 20);
    run(MODE2X32, 7, 3, 20);
    run(MODE2X32, 10, 1, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
