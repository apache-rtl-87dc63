// tb_ntt64: streams random vectors, one per cycle, through the 64-point
// (I)NTT kernel in 64-bit mode, in 2x32-bit mode and as an inverse transform,
// and compares each output vector with a direct O(n^2) evaluation of
// X[k] = sum x[j] w^(jk) mod p.  Outputs must arrive exactly 30 cycles after
// their inputs.
module tb_ntt64;
  import apache_pkg::*;
  localparam int NPT = 64, LAT = 30, NVEC = 6;
  localparam logic [63:0] P64 = 64'h3fffffffffffec81, U64 = 64'h400000000000137f;
  localparam logic [63:0] W64 = 64'h09af8f52d80baf51, WI64 = 64'h0065ba7e2a2244bb;
  localparam logic [31:0] P0 = 32'h3ffffe81, U0 = 32'h4000017f, W0 = 32'h349387f9;
  localparam logic [31:0] P1 = 32'h1fffff01, U1 = 32'h200000ff, W1 = 32'h09836c02;

  logic clk = 0, rst_n = 0;
  lane_mode_e mode;
  modulus_t m;
  word_t tw [NPT/2];
  logic in_valid, out_valid;
  word_t din [NPT], dout [NPT];
  word_t vin [NVEC][NPT];
  int checks = 0, failures = 0;
  int out_cnt, in_cyc [NVEC], out_cyc, cyc = 0;

  ntt64 dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [63:0] mulmod(logic [63:0] a, logic [63:0] b, logic [63:0] p);
    logic [127:0] r = ({64'd0, a} * {64'd0, b}) % {64'd0, p};
    return r[63:0];
  endfunction
  function automatic logic [63:0] powmod(logic [63:0] w, int e, logic [63:0] p);
    logic [63:0] r = 1;
    for (int i = 0; i < e; i++) r = mulmod(r, w, p);
    return r;
  endfunction
  function automatic logic [63:0] dft1(word_t v [NPT], int k, logic [63:0] w, logic [63:0] p, int lane, bit dual);
    logic [63:0] acc = 0, x;
    for (int j = 0; j < NPT; j++) begin
      x = dual ? {32'd0, v[j][32*lane +: 32]} : v[j];
      acc = (acc + mulmod(x, powmod(w, (j * k) % NPT, p), p)) % p;
    end
    return acc;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(lane_mode_e md, bit inv);
    logic [63:0] w;
    mode = md;
    if (md == MODE64) begin
      m.p = P64; m.u = U64; m.k_lo = 62; m.k_hi = 62;
      w = inv ? WI64 : W64;
      for (int j = 0; j < NPT/2; j++) tw[j] = powmod(w, j, P64);
    end else begin
      m.p = {P1, P0}; m.u = {U1, U0}; m.k_lo = 30; m.k_hi = 29;
      for (int j = 0; j < NPT/2; j++)
        tw[j] = {powmod({32'd0, W1}, j, {32'd0, P1})[31:0], powmod({32'd0, W0}, j, {32'd0, P0})[31:0]};
    end
    for (int v = 0; v < NVEC; v++)
      for (int i = 0; i < NPT; i++)
        vin[v][i] = (md == MODE64) ? {$urandom, $urandom} % P64 : {$urandom % P1, $urandom % P0};
    out_cnt = 0;
    fork
      begin
        for (int v = 0; v < NVEC; v++) begin
          @(negedge clk); in_valid = 1; din = vin[v]; in_cyc[v] = cyc;
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        while (out_cnt < NVEC) begin
          @(posedge clk); #1;
          if (out_valid) begin
            checks++;
            if (cyc - in_cyc[out_cnt] != LAT) begin
              failures++; $display("latency %0d", cyc - in_cyc[out_cnt]);
            end
            for (int k = 0; k < NPT; k++) begin
              logic [63:0] e;
              if (md == MODE64) e = dft1(vin[out_cnt], k, inv ? WI64 : W64, P64, 0, 0);
              else e = {dft1(vin[out_cnt], k, {32'd0, W1}, {32'd0, P1}, 1, 1)[31:0],
                        dft1(vin[out_cnt], k, {32'd0, W0}, {32'd0, P0}, 0, 1)[31:0]};
              checks++;
              if (dout[k] !== e) begin
                failures++;
                if (failures < 5) $display("vec %0d k %0d got %h exp %h", out_cnt, k, dout[k], e);
              end
            end
            out_cnt++;
          end
        end
      end
    join
  endtask

  initial begin
    in_valid = 0;
    for (int i = 0; i < NPT; i++) din[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(MODE64, 0);
    run(MODE64, 1);
    run(MODE2X32, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
