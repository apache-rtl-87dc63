// tb_regfile: random reads and writes on a small register file, compared
// with a software copy.  Checks the one-cycle read latency, that a read in
// the cycle of a write to the same row returns the old row, and that the
// higher-numbered write port wins a collision.
module tb_regfile;
  import apache_pkg::*;
  localparam int LANES = 4, ROWS = 32, NR = 4, NW = 2, AW = $clog2(ROWS);
  typedef logic [LANES-1:0][W-1:0] row_t;
  logic clk = 0;
  logic [NR-1:0] re;
  logic [NR-1:0][AW-1:0] raddr;
  row_t [NR-1:0] rdata;
  logic [NW-1:0] we;
  logic [NW-1:0][AW-1:0] waddr;
  row_t [NW-1:0] wdata;
  row_t model [ROWS];
  row_t exp_q [NR];
  logic [NR-1:0] chk_q;
  int checks = 0, failures = 0;

  regfile #(.LANES(LANES), .ROWS(ROWS), .NR(NR), .NW(NW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000 failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic row_t rnd();
    row_t r;
    for (int k = 0; k < LANES; k++) r[k] = {$urandom, $urandom};
    return r;
  endfunction

  initial begin
    re = '0; we = '0; raddr = '0; waddr = '0; wdata = '0; chk_q = '0;
    // fill every row through alternating ports
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = '0; we[r % NW] = 1'b1; waddr[r % NW] = AW'(r); wdata[r % NW] = rnd(); model[r] = wdata[r % NW];
    end
    @(negedge clk); we = '0;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      // outputs of the reads issued one cycle earlier
      for (int i = 0; i < NR; i++) if (chk_q[i]) begin
        checks++;
        if (rdata[i] !== exp_q[i]) begin failures++; if (failures < 6) $display("port %0d got %h exp %h", i, rdata[i], exp_q[i]); end
      end
      for (int i = 0; i < NR; i++) begin
        re[i] = 1'($urandom);
        raddr[i] = AW'($urandom % ROWS);
        chk_q[i] = re[i];
        exp_q[i] = model[raddr[i]];        // old contents even if written now
      end
      for (int j = 0; j < NW; j++) begin
        we[j] = 1'($urandom);
        waddr[j] = AW'((it % 7 == 0) ? 3 : $urandom % ROWS);   // frequent collisions on row 3
        wdata[j] = rnd();
      end
      for (int j = 0; j < NW; j++) if (we[j]) model[waddr[j]] = wdata[j];
    end
    @(negedge clk);
    for (int i = 0; i < NR; i++) if (chk_q[i]) begin
      checks++;
      if (rdata[i] !== exp_q[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
