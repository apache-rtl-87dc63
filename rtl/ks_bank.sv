// ks_bank: DRAM bank with accumulation adders for in-memory key switching.
//
// The bank stores key-switching key rows (ROWS rows of WORDS 64-bit words).
// Behind its sense amplifiers sits a row of WORDS divisible adders
// (cfg_addsub) and an accumulator, and a MUX chooses whether the chip FIFO
// receives the sensed row or the accumulator, as in the paper's figure of the
// modified bank.  For PubKS/PrivKS the NMC sends one bit per key row: a 1
// makes the bank open that row and add it into the accumulator, a 0 is
// accepted in one cycle without touching the array.  The adders run as one
// 64-bit lane (PrivKS) or two 32-bit lanes (PubKS) per word, wrapping modulo
// 2^64 or 2^32 as torus arithmetic does.
//
// Timing follows an open-page DRAM bank: a row already open costs T_CAS
// cycles, another row T_RP + T_RCD + T_CAS (T_RCD + T_CAS when none is open);
// the addition then takes one more cycle.  cmd_ready is low while the bank
// works.  KS_RDACC answers on the next cycle.  Key rows are preloaded through
// the wr_* port in one cycle each (preload timing is not modelled).  The
// timing values are the paper's DIMM figures counted in cycles of clk; the
// bank size and page width are this design's assumptions.
module ks_bank
  import apache_pkg::*;
#(
  parameter int unsigned ROWS  = 8192,
  parameter int unsigned WORDS = 128,
  parameter int unsigned T_RCD = 22,
  parameter int unsigned T_CAS = 22,
  parameter int unsigned T_RP  = 22,
  localparam int unsigned AW   = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  input  ks_cmd_t                 cmd,
  output logic                    cmd_ready,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_row,
  input  logic [WORDS-1:0][W-1:0] wr_data,
  output logic                    rvalid,
  output logic [WORDS-1:0][W-1:0] rdata,
  output logic [31:0]             acc_count
);
  typedef enum logic [1:0] { S_IDLE, S_WAIT, S_ADD } state_e;

  logic [WORDS-1:0][W-1:0] mem [ROWS];
  logic [WORDS-1:0][W-1:0] acc, sense, sum;
  state_e        state;
  logic [7:0]    cnt;
  logic          row_open, is_read;
  logic [AW-1:0] open_row, cur_row;
  lane_mode_e    cur_mode;

  assign cmd_ready = (state == S_IDLE);

  for (genvar k = 0; k < WORDS; k++) begin : g_add
    logic [1:0] unused_c;
    cfg_addsub u_add (.mode(cur_mode), .sub(1'b0), .a(acc[k]), .b(sense[k]), .s(sum[k]), .cout(unused_c));
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
    if (state == S_WAIT && cnt == 8'd1) sense <= mem[cur_row];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      row_open  <= 1'b0;
      open_row  <= '0;
      cur_row   <= '0;
      cur_mode  <= MODE64;
      is_read   <= 1'b0;
      acc       <= '0;
      rvalid    <= 1'b0;
      rdata     <= '0;
      acc_count <= '0;
    end else begin
      rvalid <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          case (cmd.op)
            KS_CLR: acc <= '0;
            KS_RDACC: begin
              rvalid <= 1'b1;
              rdata  <= acc;            // MUX: accumulator to the FIFO
            end
            default: if (cmd.op == KS_RDROW || cmd.bit_v) begin
              cur_row  <= AW'(cmd.row);
              cur_mode <= cmd.mode;
              is_read  <= (cmd.op == KS_RDROW);
              state    <= S_WAIT;
              if (row_open && open_row == AW'(cmd.row)) cnt <= 8'(T_CAS);
              else if (row_open)                        cnt <= 8'(T_RP + T_RCD + T_CAS);
              else                                      cnt <= 8'(T_RCD + T_CAS);
              row_open <= 1'b1;
              open_row <= AW'(cmd.row);
            end
          endcase
        end
        S_WAIT: begin
          cnt <= cnt - 8'd1;
          if (cnt == 8'd1) state <= S_ADD;
        end
        default: begin   // S_ADD: sensed row is in `sense`
          if (is_read) begin
            rvalid <= 1'b1;
            rdata  <= sense;            // MUX: sensed row to the FIFO
          end else begin
            acc       <= sum;
            acc_count <= acc_count + 32'd1;
          end
          state <= S_IDLE;
        end
      endcase
    end
  end
endmodule
