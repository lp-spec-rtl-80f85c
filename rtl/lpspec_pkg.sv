// Shared types and constants of the LP-Spec hybrid LPDDR5-PIM design.
//
// The die organisation (16 banks, 8 matrix processing units, four 32-lane INT8
// ALUs per MPU, the register-file sizes) follows the paper. The command-level
// C/A bundle, the mode-register values and the 32-bit PIM instruction format are
// this design's own choices: the paper builds on a commodity LPDDR5-PIM ISA that
// it does not spell out, so a small instruction set in that style is defined here.
// TAG_NORMAL documents the 00 tag; the controller only needs to test for the
// other codes, so lint reports it as unused.
package lpspec_pkg;

  // ---------------- die organisation (paper, Sec. IV-B) ----------------
  localparam int unsigned BANKS      = 16;   // banks per die
  localparam int unsigned MPUS       = 8;    // one MPU per two banks
  localparam int unsigned N_ALU      = 4;    // 32-wide SIMD ALUs per MPU
  localparam int unsigned LANES      = 32;   // INT8 lanes per ALU
  localparam int unsigned COL_BITS   = 256;  // one column burst of a x16 die (BL16)
  localparam int unsigned CRF_DEPTH  = 32;   // 32 x 32-bit instructions
  localparam int unsigned GRF_DEPTH  = 16;   // 16 x (4 x 256-bit)
  localparam int unsigned SRF_DEPTH  = 16;   // 16 x (4 x 8-bit)
  localparam int unsigned ARF_DEPTH  = 8;    // 8 x (4 x 1024-bit), INT32 lanes

  // ---------------- address widths ----------------
  localparam int unsigned BA_W  = 4;   // bank (bank group + bank) address
  localparam int unsigned ROW_W = 15;  // 32768 rows x 2 KB page x 16 banks = 1 GB
  localparam int unsigned COL_W = 6;   // 64 column bursts of 32 B per 2 KB row

  // Rows whose upper bits are all ones form the register window of a PIM die.
  localparam logic [ROW_W-5:0] REG_ROW_TAG = '1;

  // ---------------- command-level C/A bundle ----------------
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4,
    CMD_MRW = 3'd5
  } cmd_e;

  typedef struct packed {
    cmd_e             cmd;
    logic [BA_W-1:0]  ba;
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
  } ca_t;

  // Operating mode held in the die's mode register (written with CMD_MRW, col[1:0]).
  typedef enum logic [1:0] {
    MODE_SB    = 2'd0,  // single bank: normal DRAM
    MODE_AB    = 2'd1,  // all bank: broadcast writes, register loading
    MODE_ABPIM = 2'd2   // all bank PIM: each column command runs one instruction
  } mode_e;

  // NMC operation tag (paper, Fig. 5): 00 normal, 01 copy-write, 1x PIM buffer.
  localparam logic [1:0] TAG_NORMAL = 2'b00;
  localparam logic [1:0] TAG_COPY   = 2'b01;

  // ---------------- PIM instruction ----------------
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_JUMP = 4'd1,
    OP_EXIT = 4'd2,
    OP_FILL = 4'd4,   // GRF[dst] <- bank column, all four ALU slots
    OP_ADD  = 4'd8,   // ARF[dst] <- bank + operand (element-wise, INT32)
    OP_MUL  = 4'd9,   // ARF[dst] <- bank * operand
    OP_MAC  = 4'd10   // ARF[dst] <- ARF[dst] + bank * operand
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic        bank_odd;  // bank operand from the odd bank of the MPU's pair
    logic        src_grf;   // 1: operand is the ALU's GRF vector; 0: its SRF scalar
    logic        aam;       // operand index taken from the command's column address
    logic [3:0]  dst;       // ARF (low 3 bits) or GRF index
    logic [3:0]  src;       // GRF / SRF index
    logic [16:0] imm;       // JUMP: imm[4:0] target PC, imm[12:5] repeat count
  } instr_t;

  typedef enum logic [1:0] {
    ALU_ADD = 2'd0,
    ALU_MUL = 2'd1,
    ALU_MAC = 2'd2
  } alu_op_e;

  // Register-window regions (row[3:2] of a window row)
  typedef enum logic [1:0] {
    REG_CRF = 2'd0,
    REG_GRF = 2'd1,
    REG_SRF = 2'd2,
    REG_ARF = 2'd3
  } reg_region_e;

  // ---------------- LP-Spec scheduler ----------------
  // Probabilities and expected lengths are unsigned Q1.15 (PROB_ONE = 1.0).
  localparam int unsigned PW       = 16;
  localparam logic [PW-1:0] PROB_ONE = 16'h8000;

  // Hardware-estimator configuration, in scheduler clock cycles and energy units.
  typedef struct packed {
    logic [23:0] t_npu;       // N_params,DRAM / BW_off-chip
    logic [23:0] t_pim_pass;  // N_params,PIM / BW_PIM (one pass of N_ALU tokens)
    logic [23:0] t_slo;       // latency budget per decoding step
    logic [23:0] e_fixed;     // energy per step independent of the token count
    logic [23:0] e_token;     // energy per verified token
    logic [23:0] e_budget;    // energy budget per step
  } est_cfg_t;

endpackage
