// apache_pkg: types and constants shared by the near-memory FHE datapath.
//
// Every datapath word is 64 bits wide.  A word is read either as one 64-bit
// residue (lane mode MODE64) or as two independent 32-bit residues packed in
// its halves (MODE2X32); the configurable multipliers, adders and (I)NTT units
// all follow this convention.  The 64/2x32 split follows the paper; the
// instruction format below is this design's own choice, since the paper names
// the operators the controller runs but gives no encoding.
package apache_pkg;

  localparam int unsigned W    = 64;   // datapath word width
  localparam int unsigned HW   = 32;   // half word width (2x32 mode)
  localparam int unsigned KW   = 7;    // width of a modulus bit-length field

  typedef logic [W-1:0] word_t;

  // Lane mode of every configurable unit.
  typedef enum logic {
    MODE64   = 1'b0,   // one 64-bit residue per word
    MODE2X32 = 1'b1    // two 32-bit residues per word, low half = lane 0
  } lane_mode_e;

  // Operation of the modular adder stage.
  typedef enum logic [1:0] {
    MA_PASS = 2'd0,    // out = x
    MA_ADD  = 2'd1,    // out = x + y mod p
    MA_SUB  = 2'd2,    // out = x - y mod p
    MA_RSUB = 2'd3     // out = y - x mod p
  } ma_op_e;

  // Modulus set used by a modular unit: p, Barrett constant u = floor(4^k / p)
  // and the bit length k of p, one set per 32-bit half in MODE2X32 (the
  // 64-bit set uses the full words and k_lo).
  typedef struct packed {
    word_t         p;
    word_t         u;
    logic [KW-1:0] k_hi;
    logic [KW-1:0] k_lo;
  } modulus_t;

  // Controller instruction set (this design's own encoding).
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_SETCSR  = 4'd1,   // csr[dst] = imm
    OP_MOVE    = 4'd2,   // copy count rows between data buffer and register files
    OP_R1      = 4'd3,   // routine 1: (I)NTT -> MMult -> MAdd on the 8 MB register file
    OP_R2      = 4'd4,   // routine 2: MMult -> MAdd on the 1 MB register file
    OP_AUTO    = 4'd5,   // automorphism of one polynomial
    OP_DECOMP  = 4'd6,   // gadget decomposition of count rows
    OP_KSBITS  = 4'd7,   // stream key-switching bits to the in-DRAM KS banks
    OP_KSREAD  = 4'd8,   // read one KS bank accumulator into the register file
    OP_KSCLR   = 4'd9,   // clear all KS bank accumulators
    OP_LOADTW  = 4'd10,  // load (I)NTT twiddle factors from a register-file row
    OP_SYNC    = 4'd11   // wait until every routine is idle
  } opcode_e;

  // Memory spaces for OP_MOVE.
  typedef enum logic [1:0] {
    SP_BUF  = 2'd0,
    SP_RF8  = 2'd1,
    SP_RF1  = 2'd2
  } space_e;

  // CSR indices.
  localparam int unsigned CSR_P     = 0;  // modulus p
  localparam int unsigned CSR_U     = 1;  // Barrett constant u
  localparam int unsigned CSR_K     = 2;  // [6:0] k_lo, [14:8] k_hi
  localparam int unsigned CSR_ROT   = 3;  // automorphism: rotation a (TFHE) / g^-1 (CKKS)
  localparam int unsigned CSR_DEC   = 4;  // decomposition: [5:0] base bits, [11:8] levels
  localparam int unsigned CSR_KS    = 5;  // key switching: [5:0] bits t, [31:16] key row base
  localparam int unsigned NUM_CSR   = 6;

  // Instruction flag bits (field flags of instr_t).
  localparam int unsigned F_NTT_EN  = 0;  // R1: pass through the (I)NTT FU
  localparam int unsigned F_NTT_INV = 1;  // R1: inverse transform
  localparam int unsigned F_MM_EN   = 2;  // R1/R2: multiply by row src_b
  localparam int unsigned F_LINK    = 3;  // R1: (I)NTT output drives routine 2's MMult/MAdd
  localparam int unsigned F_CKKS    = 4;  // AUTO: CKKS permutation instead of TFHE rotation

  typedef struct packed {
    opcode_e       op;
    lane_mode_e    mode;
    logic [1:0]    unit;    // sub-unit select (automorphism/decomposition/KS chip)
    logic [1:0]    ma_op;   // ma_op_e for R1/R2; dst space for MOVE
    logic [1:0]    src_sp;  // source space for MOVE; KS bank high bits
    logic [7:0]    flags;
    logic [15:0]   dst;
    logic [15:0]   src_a;
    logic [15:0]   src_b;
    logic [15:0]   src_c;
    logic [15:0]   count;
    word_t         imm;
  } instr_t;

  // Commands to the key-switching banks inside the modified DRAM chips.
  typedef enum logic [1:0] {
    KS_ACC   = 2'd0,   // if bit: acc += key row `row` (after the DRAM row access)
    KS_CLR   = 2'd1,   // acc = 0 in every bank of the chip
    KS_RDACC = 2'd2,   // drive the accumulator onto the chip's read port
    KS_RDROW = 2'd3    // plain read of row `row` (after the DRAM row access)
  } ks_op_e;

  typedef struct packed {
    ks_op_e      op;
    lane_mode_e  mode;    // adders as one 64-bit or two 32-bit lanes
    logic        bit_v;   // key-switching bit for KS_ACC
    logic [3:0]  bank;
    logic [15:0] row;
  } ks_cmd_t;

  // Per-row control of routine 1 / routine 2, issued by the controller and
  // carried down the core's pipeline.
  typedef struct packed {
    logic        valid;
    lane_mode_e  mode;
    logic        ntt_en;
    logic        mm_en;
    ma_op_e      ma_op;
    logic        link;    // routine 1 row that finishes in routine 2 (dashed wire)
    logic [15:0] a;
    logic [15:0] b;
    logic [15:0] c;
    logic [15:0] dst;
  } row_ctl_t;

  // Where a row read by the move/auxiliary sequencer goes.
  typedef enum logic [2:0] {
    TO_WB   = 3'd0,   // straight to the write-back pointer (OP_MOVE)
    TO_AUTO = 3'd1,   // automorphism load port
    TO_DEC  = 3'd2,   // decomposition input
    TO_TW   = 3'd3,   // (I)NTT twiddle tables
    TO_KS   = 3'd4    // key-switching bit register
  } rd_to_e;

  // Latencies of the two routines, from issue to register-file write.
  localparam int unsigned NTT_LAT = 30;
  localparam int unsigned MM_LAT  = 4;
  localparam int unsigned R1_LAT  = NTT_LAT + MM_LAT + 2;  // 36
  localparam int unsigned R2_LAT  = MM_LAT + 2;            // 6

endpackage
