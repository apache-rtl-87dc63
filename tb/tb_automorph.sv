// tb_automorph: loads random polynomials into the automorphism unit and
// checks (1) TFHE rotations X^a*ACC - ACC mod (X^N+1) for edge and random
// rotation amounts, including two back-to-back rotations that use both
// ping-pong banks, and (2) CKKS automorphisms X -> X^g, against a reference
// computed coefficient by coefficient.  It also checks the cycle count from
// start to the first result word.
module tb_automorph;
  import apache_pkg::*;
  localparam int AROWS = 32, ACOLS = 64, IO_W = 64, N = AROWS * ACOLS, NBEAT = N / IO_W;
  localparam int RW = $clog2(2 * N);
  localparam logic [63:0] P64 = 64'h3fffffffffffec81;
  localparam logic [31:0] P0 = 32'h3ffffe81, P1 = 32'h1fffff01;

  logic clk = 0, rst_n = 0;
  lane_mode_e mode;
  word_t p;
  logic ld_valid, start, ckks, ready, busy, out_valid, out_last;
  logic [IO_W-1:0][W-1:0] ld_data, out_data;
  logic [RW-1:0] rot;
  int checks = 0, failures = 0, cyc = 0;
  word_t f [N];
  word_t e [N];

  automorph #(.AROWS(AROWS), .ACOLS(ACOLS), .IO_W(IO_W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t neg(word_t v);
    if (mode == MODE64) return (v == 0) ? 0 : P64 - v;
    return {(v[63:32] == 0) ? 32'd0 : P1 - v[63:32], (v[31:0] == 0) ? 32'd0 : P0 - v[31:0]};
  endfunction
  function automatic word_t sub(word_t a, word_t b);
    if (mode == MODE64) return (a >= b) ? a - b : a + P64 - b;
    return {(a[63:32] >= b[63:32]) ? a[63:32] - b[63:32] : a[63:32] + P1 - b[63:32],
            (a[31:0]  >= b[31:0])  ? a[31:0]  - b[31:0]  : a[31:0]  + P0 - b[31:0]};
  endfunction

  task automatic load_poly();
    for (int j = 0; j < N; j++)
      f[j] = (mode == MODE64) ? {$urandom, $urandom} % P64 : {$urandom % P1, $urandom % P0};
    for (int b = 0; b < NBEAT; b++) begin
      @(negedge clk);
      ld_valid = 1;
      for (int k = 0; k < IO_W; k++) ld_data[k] = f[b * IO_W + k];
    end
    @(negedge clk); ld_valid = 0;
  endtask

  task automatic expect_tfhe(int a);
    word_t r [N];
    for (int j = 0; j < N; j++) begin
      int d = (j + a) % (2 * N);
      if (d < N) r[d] = f[j]; else r[d - N] = neg(f[j]);
    end
    for (int j = 0; j < N; j++) e[j] = sub(r[j], f[j]);
  endtask

  task automatic expect_ckks(int g);
    for (int j = 0; j < N; j++) begin
      int d = (j * g) % (2 * N);
      if (d < N) e[d] = f[j]; else e[d - N] = neg(f[j]);
    end
  endtask

  task automatic collect(int exp_lat, int t0);
    int beat = 0;
    while (beat < NBEAT) begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (beat == 0 && exp_lat > 0) begin
          checks++;
          if (cyc - t0 != exp_lat) begin failures++; $display("latency %0d != %0d", cyc - t0, exp_lat); end
        end
        for (int k = 0; k < IO_W; k++) begin
          checks++;
          if (out_data[k] !== e[beat * IO_W + k]) begin
            failures++;
            if (failures < 6) $display("beat %0d k %0d got %h exp %h", beat, k, out_data[k], e[beat * IO_W + k]);
          end
        end
        checks++;
        if (out_last !== (beat == NBEAT - 1)) failures++;
        beat++;
      end
    end
  endtask

  task automatic do_op(bit is_ckks, int arg, int exp_lat);
    int t0;
    @(negedge clk);
    while (!ready) @(negedge clk);
    start = 1; ckks = is_ckks; rot = RW'(arg);
    t0 = cyc;
    @(negedge clk); start = 0;
    collect(exp_lat, t0);
  endtask

  initial begin
    int amounts [10] = '{0, 1, 31, 32, 33, 2047, 2048, 2079, 4095, 1234};
    ld_valid = 0; start = 0; ckks = 0; rot = '0;
    for (int k = 0; k < IO_W; k++) ld_data[k] = '0;
    mode = MODE64; p = P64;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_poly();
    foreach (amounts[i]) begin
      expect_tfhe(amounts[i]);
      do_op(0, amounts[i], AROWS + 5);
    end
    // two rotations issued back to back: the second round overlaps the
    // first read-out in the other ping-pong bank
    begin
      word_t e1 [N], e2 [N];
      int a1 = 77, a2 = 3001;
      expect_tfhe(a2); e2 = e;
      expect_tfhe(a1); e1 = e;
      @(negedge clk); while (!ready) @(negedge clk);
      start = 1; ckks = 0; rot = RW'(a1);
      @(negedge clk); start = 0;
      fork
        begin
          collect(0, 0);
          e = e2;
          collect(0, 0);
        end
        begin
          while (!ready) @(negedge clk);
          // the second round starts while the first read-out is running
          checks++;
          if (!busy) failures++;
          start = 1; rot = RW'(a2);
          @(negedge clk); start = 0;
        end
      join
    end
    // CKKS automorphisms
    for (int t = 0; t < 3; t++) begin
      int g, gi;
      g = (t == 0) ? 5 : (($urandom % N) * 2 + 1);
      gi = 1;
      for (int x = 1; x < 2 * N; x += 2) if ((x * g) % (2 * N) == 1) gi = x;
      expect_ckks(g);
      do_op(1, gi, 2);
    end
    // 2x32 lane mode
    mode = MODE2X32; p = {P1, P0};
    load_poly();
    expect_tfhe(1500); do_op(0, 1500, AROWS + 5);
    expect_ckks(2049 + 2);
    begin
      int gi = 1;
      for (int x = 1; x < 2 * N; x += 2) if ((x * 2051) % (2 * N) == 1) gi = x;
      do_op(1, gi, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
