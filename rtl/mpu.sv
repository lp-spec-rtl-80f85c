// mpu: matrix processing unit of an LP-Spec PIM die, shared by two banks.
//
// An MPU holds four 32-wide INT8 SIMD ALUs, the command/general/scalar/
// accumulation register files (CRF 32x32 b, GRF 16 x 4x256 b, SRF 16 x 4x8 b,
// ARF 8 x 4x1024 b) and a controller, as in the paper. One 256-bit column read
// from a bank (32 INT8 weights) is broadcast to all four ALUs; ALU k takes its
// second operand from its own GRF slot or SRF byte. With the SRF, each ALU
// multiplies the same weight row by a different token's input scalar, so four
// draft tokens are served by one bank access: that is the weight reuse that
// turns the GEMV unit into a GEMM unit (T_PIM grows with ceil(L_spec / 4)).
//
// Timing: on a cycle with trigger_i the controller issues one instruction; the
// bank operands must be valid in that cycle and the ARF/GRF update lands at the
// next rising edge. Host access to the registers goes through a 256-bit window
// (reg_* ports) decoded by the die; writes are masked into the wide entries:
//   CRF  idx[1:0] selects 8 instructions;   GRF  idx[3:0], slot alu;
//   SRF  idx[3:0], data[31:0] = one byte per ALU;   ARF idx[4:2] entry,
//   idx[1:0] 256-bit slice, slot alu.
// The instruction format and register window are this design's choices.
module mpu
  import lpspec_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // PIM execution
  input  logic                start_i,
  input  logic                trigger_i,
  input  logic [COL_W-1:0]    col_i,
  input  logic [COL_BITS-1:0] bank_even_i,
  input  logic [COL_BITS-1:0] bank_odd_i,
  // host register window
  input  logic                reg_we_i,
  input  reg_region_e         reg_wregion_i,
  input  logic [1:0]          reg_walu_i,
  input  logic [4:0]          reg_widx_i,
  input  logic [COL_BITS-1:0] reg_wdata_i,
  input  reg_region_e         reg_rregion_i,
  input  logic [1:0]          reg_ralu_i,
  input  logic [4:0]          reg_ridx_i,
  output logic [COL_BITS-1:0] reg_rdata_o,
  // status
  output logic                exec_o,
  output logic                done_o,
  output logic                miss_o,
  output logic [4:0]          pc_o
);
  localparam int unsigned GRF_W = N_ALU * COL_BITS;      // 1024
  localparam int unsigned SRF_W = N_ALU * 8;             // 32
  localparam int unsigned ARF_W = N_ALU * LANES * 32;    // 4096

  // ---------------- register files ----------------
  logic                 crf_we;  logic [1:0] crf_wa;  logic [COL_BITS-1:0] crf_wd, crf_wm;
  logic [COL_BITS-1:0]  crf_rd0, crf_rd1;
  logic                 grf_we;  logic [3:0] grf_wa;  logic [GRF_W-1:0] grf_wd, grf_wm;
  logic [GRF_W-1:0]     grf_rd0, grf_rd1;
  logic                 srf_we;  logic [3:0] srf_wa;  logic [SRF_W-1:0] srf_wd, srf_wm;
  logic [SRF_W-1:0]     srf_rd0, srf_rd1;
  logic                 arf_we;  logic [2:0] arf_wa;  logic [ARF_W-1:0] arf_wd, arf_wm;
  logic [ARF_W-1:0]     arf_rd0, arf_rd1;

  instr_t     instr;
  logic [4:0] pc;
  logic       exec;
  logic [3:0] src_idx;

  mpu_regfile #(.DEPTH(CRF_DEPTH*32/COL_BITS), .WIDTH(COL_BITS)) u_crf (
    .clk, .rst_n, .we(crf_we), .waddr(crf_wa), .wdata(crf_wd), .wmask(crf_wm),
    .raddr0(pc[4:3]), .rdata0(crf_rd0), .raddr1(reg_ridx_i[1:0]), .rdata1(crf_rd1));
  mpu_regfile #(.DEPTH(GRF_DEPTH), .WIDTH(GRF_W)) u_grf (
    .clk, .rst_n, .we(grf_we), .waddr(grf_wa), .wdata(grf_wd), .wmask(grf_wm),
    .raddr0(src_idx), .rdata0(grf_rd0), .raddr1(reg_ridx_i[3:0]), .rdata1(grf_rd1));
  mpu_regfile #(.DEPTH(SRF_DEPTH), .WIDTH(SRF_W)) u_srf (
    .clk, .rst_n, .we(srf_we), .waddr(srf_wa), .wdata(srf_wd), .wmask(srf_wm),
    .raddr0(src_idx), .rdata0(srf_rd0), .raddr1(reg_ridx_i[3:0]), .rdata1(srf_rd1));
  mpu_regfile #(.DEPTH(ARF_DEPTH), .WIDTH(ARF_W)) u_arf (
    .clk, .rst_n, .we(arf_we), .waddr(arf_wa), .wdata(arf_wd), .wmask(arf_wm),
    .raddr0(instr.dst[2:0]), .rdata0(arf_rd0), .raddr1(reg_ridx_i[4:2]), .rdata1(arf_rd1));

  assign instr = instr_t'(crf_rd0[pc[2:0]*32 +: 32]);

  // ---------------- controller ----------------
  mpu_ctrl u_ctrl (
    .clk, .rst_n, .start_i, .trigger_i, .col_i, .instr_i(instr),
    .pc_o(pc), .exec_o(exec), .src_idx_o(src_idx), .done_o, .miss_o);

  assign exec_o = exec;
  assign pc_o   = pc;

  // ---------------- ALUs ----------------
  logic [COL_BITS-1:0] bank_op;
  alu_op_e             alu_op;
  logic [ARF_W-1:0]    alu_out;

  assign bank_op = instr.bank_odd ? bank_odd_i : bank_even_i;

  always_comb begin
    unique case (instr.op)
      OP_ADD:  alu_op = ALU_ADD;
      OP_MUL:  alu_op = ALU_MUL;
      default: alu_op = ALU_MAC;
    endcase
  end

  for (genvar k = 0; k < N_ALU; k++) begin : g_alu
    logic [COL_BITS-1:0] opnd;
    assign opnd = instr.src_grf ? grf_rd0[k*COL_BITS +: COL_BITS]
                                : {LANES{srf_rd0[k*8 +: 8]}};
    simd_alu32 u_alu (
      .op(alu_op), .a(bank_op), .b(opnd),
      .acc_i(arf_rd0[k*LANES*32 +: LANES*32]),
      .acc_o(alu_out[k*LANES*32 +: LANES*32]));
  end

  // ---------------- register writes ----------------
  logic is_alu_op;
  assign is_alu_op = (instr.op == OP_ADD) || (instr.op == OP_MUL) || (instr.op == OP_MAC);

  always_comb begin
    crf_we = reg_we_i && (reg_wregion_i == REG_CRF);
    crf_wa = reg_widx_i[1:0];
    crf_wd = reg_wdata_i;
    crf_wm = '1;

    if (exec && instr.op == OP_FILL) begin
      grf_we = 1'b1;
      grf_wa = instr.dst;
      grf_wd = {N_ALU{bank_op}};
      grf_wm = '1;
    end else begin
      grf_we = reg_we_i && (reg_wregion_i == REG_GRF);
      grf_wa = reg_widx_i[3:0];
      grf_wd = {N_ALU{reg_wdata_i}};
      grf_wm = GRF_W'({COL_BITS{1'b1}}) << (reg_walu_i * COL_BITS);
    end

    srf_we = reg_we_i && (reg_wregion_i == REG_SRF);
    srf_wa = reg_widx_i[3:0];
    srf_wd = reg_wdata_i[SRF_W-1:0];
    srf_wm = '1;

    if (exec && is_alu_op) begin
      arf_we = 1'b1;
      arf_wa = instr.dst[2:0];
      arf_wd = alu_out;
      arf_wm = '1;
    end else begin
      arf_we = reg_we_i && (reg_wregion_i == REG_ARF);
      arf_wa = reg_widx_i[4:2];
      arf_wd = {(ARF_W/COL_BITS){reg_wdata_i}};
      arf_wm = ARF_W'({COL_BITS{1'b1}}) << ((32'(reg_walu_i) * 4 + 32'(reg_widx_i[1:0])) * COL_BITS);
    end
  end

  // ---------------- host read window ----------------
  always_comb begin
    unique case (reg_rregion_i)
      REG_CRF: reg_rdata_o = crf_rd1;
      REG_GRF: reg_rdata_o = grf_rd1[reg_ralu_i*COL_BITS +: COL_BITS];
      REG_SRF: reg_rdata_o = COL_BITS'(srf_rd1);
      default: reg_rdata_o = arf_rd1[(32'(reg_ralu_i)*4 + 32'(reg_ridx_i[1:0]))*COL_BITS +: COL_BITS];
    endcase
  end
endmodule
