// tb_ntt_fu: the (I)NTT FU at a reduced size: two 16-point kernels side by
// side (32 lanes).  A twiddle row is loaded, rows are streamed one per cycle
// forward and inverse, and every output row is compared with a direct
// evaluation of X[k] = sum x[j] w^(+-jk) mod p over each 16-word slice.  The
// result must appear exactly STAGES*(MMult latency + 1) = 20 cycles after the
// input row.
module tb_ntt_fu;
  import apache_pkg::*;
  localparam int LANES = 32, NPT = 16, LAT = 20, NV = 5;
  localparam logic [63:0] P64 = 64'h3fffffffffffec81, U64 = 64'h400000000000137f;
  localparam logic [63:0] W64 = 64'h09af8f52d80baf51;
  typedef logic [LANES-1:0][W-1:0] row_t;
  logic clk = 0, rst_n = 0;
  lane_mode_e mode = MODE64;
  modulus_t m;
  logic inverse = 0, tw_load = 0, in_valid = 0, out_valid;
  row_t tw_row = '0, din = '0, dout;
  row_t vin [2][NV];
  int checks = 0, failures = 0, cyc = 0, t_in [2][NV];
  logic [63:0] w16;

  ntt_fu #(.LANES(LANES), .NPT(NPT)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

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
  function automatic logic [63:0] powmod(logic [63:0] w, int e);
    logic [63:0] r = 1;
    for (int i = 0; i < e; i++) r = mulmod(r, w, P64);
    return r;
  endfunction

  task automatic run(bit inv, int ph);
    fork
      for (int v = 0; v < NV; v++) begin
        @(negedge clk);
        inverse = inv; in_valid = 1;
        for (int k = 0; k < LANES; k++) din[k] = {$urandom, $urandom} % P64;
        vin[ph][v] = din; t_in[ph][v] = cyc;
        @(negedge clk) in_valid = 0;
        if (v == NV - 1) ;
      end
      for (int v = 0; v < NV; v++) begin
        @(posedge clk); #1;
        while (!out_valid) begin @(posedge clk); #1; end
        checks++;
        if (cyc - t_in[ph][v] != LAT) begin failures++; $display("latency %0d", cyc - t_in[ph][v]); end
        for (int s = 0; s < LANES / NPT; s++)
          for (int k = 0; k < NPT; k++) begin
            logic [63:0] acc = 0, w = powmod(w16, inv ? (NPT - k) % NPT : k), wj = 1;
            for (int j = 0; j < NPT; j++) begin
              acc = 64'((65'(acc) + 65'(mulmod(vin[ph][v][s * NPT + j], wj, P64))) % 65'(P64));
              wj = mulmod(wj, w, P64);
            end
            checks++;
            if (dout[s * NPT + k] !== acc) begin
              failures++;
              if (failures < 6) $display("inv %0d v %0d lane %0d got %h exp %h", inv, v, s * NPT + k, dout[s * NPT + k], acc);
            end
          end
      end
    join
  endtask

  initial begin
    m.p = P64; m.u = U64; m.k_lo = 7'd62; m.k_hi = 7'd62;
    w16 = powmod(W64, 4);                       // a primitive 16th root of unity
    repeat (2) @(negedge clk);
    rst_n = 1;
    // twiddle row: forward powers in words 0..7, inverse powers in 8..15,
    // the same table repeated for every kernel slice
    @(negedge clk);
    for (int s = 0; s < LANES / NPT; s++)
      for (int k = 0; k < NPT / 2; k++) begin
        tw_row[s * NPT + k] = powmod(w16, k);
        tw_row[s * NPT + NPT / 2 + k] = powmod(w16, (NPT - k) % NPT);
      end
    tw_load = 1;
    @(negedge clk) tw_load = 0;
    run(0, 0);
    repeat (LAT + 2) @(negedge clk);
    run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
