// tb_ks_bank: preloads random key rows into one KS bank, then streams
// key-switching bits and checks (1) the accumulator against a reference sum
// of the rows whose bit is 1, in 64-bit and 2x32-bit adder modes, (2) the
// busy time of each command against the open-page timing (T_CAS on the open
// row, T_RP+T_RCD+T_CAS on another row, +1 cycle for the addition, 1 cycle for
// a zero bit), and (3) plain row reads through the output MUX.
module tb_ks_bank;
  import apache_pkg::*;
  localparam int ROWS = 64, WORDS = 4, TRCD = 3, TCAS = 4, TRP = 5;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, wr_en, rvalid;
  ks_cmd_t cmd;
  logic [5:0] wr_row;
  logic [WORDS-1:0][W-1:0] wr_data, rdata, ref_acc;
  logic [31:0] acc_count;
  logic [WORDS-1:0][W-1:0] keys [ROWS];
  int checks = 0, failures = 0, cyc = 0, open_row = -1, n_acc = 0;

  ks_bank #(.ROWS(ROWS), .WORDS(WORDS), .T_RCD(TRCD), .T_CAS(TCAS), .T_RP(TRP)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(ks_op_e op, int row, bit b, lane_mode_e md, int exp_busy);
    int t0;
    @(negedge clk);
    cmd_valid = 1; cmd = '{op: op, mode: md, bit_v: b, bank: 4'd0, row: 16'(row)};
    @(posedge clk); t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    if (exp_busy >= 0) begin
      checks++;
      if (cyc - t0 != exp_busy) begin failures++; $display("busy %0d exp %0d (op %0d)", cyc - t0, exp_busy, op); end
    end
  endtask

  function automatic int access_time(int row);
    int t;
    if (open_row == row) t = TCAS;
    else if (open_row < 0) t = TRCD + TCAS;
    else t = TRP + TRCD + TCAS;
    open_row = row;
    return t + 2;   // accept cycle + access + addition
  endfunction

  task automatic check_acc();
    @(negedge clk);
    cmd_valid = 1; cmd = '{op: KS_RDACC, mode: MODE64, bit_v: 1'b0, bank: 4'd0, row: 16'd0};
    @(posedge clk); #1;
    cmd_valid = 0;
    checks++;
    if (!rvalid || rdata !== ref_acc) begin failures++; $display("acc %h exp %h", rdata, ref_acc); end
  endtask

  initial begin
    cmd_valid = 0; wr_en = 0; cmd = '0; wr_row = '0; wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int k = 0; k < WORDS; k++) keys[r][k] = {$urandom, $urandom};
      @(negedge clk); wr_en = 1; wr_row = 6'(r); wr_data = keys[r];
    end
    @(negedge clk); wr_en = 0;
    for (int md = 0; md < 2; md++) begin
      send(KS_CLR, 0, 0, MODE64, 1);
      ref_acc = '0;
      for (int i = 0; i < 60; i++) begin
        int row = (i % 5 == 0) ? open_row : $urandom % ROWS;
        bit b = (i % 3 != 1);
        if (row < 0) row = 0;
        if (b) begin
          for (int k = 0; k < WORDS; k++)
            if (md == 0) ref_acc[k] = ref_acc[k] + keys[row][k];
            else ref_acc[k] = {ref_acc[k][63:32] + keys[row][k][63:32], ref_acc[k][31:0] + keys[row][k][31:0]};
          n_acc++;
          send(KS_ACC, row, 1, lane_mode_e'(md), access_time(row));
        end else begin
          send(KS_ACC, row, 0, lane_mode_e'(md), 1);
        end
      end
      check_acc();
    end
    checks++;
    if (acc_count != 32'(n_acc)) failures++;
    // plain row reads through the MUX
    for (int i = 0; i < 5; i++) begin
      int row = $urandom % ROWS;
      fork
        send(KS_RDROW, row, 0, MODE64, access_time(row));
        begin
          @(posedge rvalid); #1;
          checks++;
          if (rdata !== keys[row]) failures++;
        end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
