// tb_ks_dram: sends key-switching bits spread over the banks of one KS chip.
// Checks that every bank's accumulator equals its reference sum, that a
// command to a busy bank is held off (cmd_ready low) while other banks accept
// commands, and that interleaving over the banks finishes in far fewer cycles
// than the same work on a single bank would take.
module tb_ks_dram;
  import apache_pkg::*;
  localparam int BANKS = 4, ROWS = 16, WORDS = 2, TRCD = 6, TCAS = 6, TRP = 6;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, wr_en, rvalid;
  ks_cmd_t cmd;
  logic [3:0] wr_bank;
  logic [3:0] wr_row;
  logic [WORDS-1:0][W-1:0] wr_data, rdata;
  logic [31:0] acc_total;
  logic [WORDS-1:0][W-1:0] keys [BANKS][ROWS];
  logic [WORDS-1:0][W-1:0] ref_acc [BANKS];
  int checks = 0, failures = 0, cyc = 0, stalls = 0;

  ks_dram #(.BANKS(BANKS), .ROWS(ROWS), .WORDS(WORDS), .T_RCD(TRCD), .T_CAS(TCAS), .T_RP(TRP)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd_valid && !cmd_ready) stalls <= stalls + 1;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(ks_cmd_t c);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  initial begin
    int t0, t_par, n = 0;
    cmd_valid = 0; wr_en = 0; cmd = '0; wr_bank = '0; wr_row = '0; wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < BANKS; b++)
      for (int r = 0; r < ROWS; r++) begin
        for (int k = 0; k < WORDS; k++) keys[b][r][k] = {$urandom, $urandom};
        @(negedge clk); wr_en = 1; wr_bank = 4'(b); wr_row = 4'(r); wr_data = keys[b][r];
      end
    @(negedge clk); wr_en = 0;
    issue('{op: KS_CLR, mode: MODE64, bit_v: 1'b0, bank: 4'd0, row: 16'd0});
    for (int b = 0; b < BANKS; b++) ref_acc[b] = '0;
    t0 = cyc;
    for (int i = 0; i < 32; i++) begin
      int b = i % BANKS, r = (i / BANKS) % ROWS;
      for (int k = 0; k < WORDS; k++) ref_acc[b][k] += keys[b][r][k];
      issue('{op: KS_ACC, mode: MODE64, bit_v: 1'b1, bank: 4'(b), row: 16'(r)});
      n++;
    end
    // wait for all banks to be idle
    @(negedge clk); cmd = '{op: KS_CLR, mode: MODE64, bit_v: 1'b0, bank: 4'd0, row: 16'd0}; #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    t_par = cyc - t0;
    checks++;
    if (t_par * 2 > 32 * (TRP + TRCD + TCAS + 1)) begin failures++; $display("no bank parallelism: %0d cycles", t_par); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    for (int b = 0; b < BANKS; b++) begin
      @(negedge clk);
      cmd_valid = 1; cmd = '{op: KS_RDACC, mode: MODE64, bit_v: 1'b0, bank: 4'(b), row: 16'd0};
      @(posedge clk); #1; cmd_valid = 0;
      checks++;
      if (!rvalid || rdata !== ref_acc[b]) begin failures++; $display("bank %0d acc %h exp %h", b, rdata, ref_acc[b]); end
    end
    checks++;
    if (acc_total != 32'(n)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
