// tb_mpu: one MPU computes a 4-token x 16-deep x 32-column INT8 GEMM.
//
// The host loads the input scalars X[t][k] into SRF[k] (one byte per ALU =
// token) and a program into the CRF: MAC ARF0 += bank x SRF[col] in
// address-aligned mode, looped 16 times, then FILL GRF1 <- odd bank,
// MAC ARF1 += even bank x GRF1, MUL ARF2 = even bank x SRF[3],
// ADD ARF3 = even bank + SRF[2], EXIT. Each trigger carries one weight row
// W[k] (32 INT8) on the even bank. The ARF results are read back through the
// 256-bit register window and compared with sums computed here. The number of
// triggers the program consumes (one per column command, 20) is checked too.
module tb_mpu;
  import lpspec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start_i, trigger_i;
  logic [COL_W-1:0] col_i;
  logic [255:0] bank_even_i, bank_odd_i;
  logic reg_we_i;
  reg_region_e reg_wregion_i, reg_rregion_i;
  logic [1:0] reg_walu_i, reg_ralu_i;
  logic [4:0] reg_widx_i, reg_ridx_i;
  logic [255:0] reg_wdata_i, reg_rdata_o;
  logic exec_o, done_o, miss_o;
  logic [4:0] pc_o;
  int checks = 0, failures = 0;

  mpu dut (.*);
  always #5 clk = ~clk;

  logic signed [7:0] X [4][16];
  logic signed [7:0] W [20][32];
  logic signed [7:0] V [32];     // odd-bank vector for FILL

  function automatic instr_t mk(opcode_e op, logic odd, logic grf, logic aam,
                                logic [3:0] dst, logic [3:0] src, logic [16:0] imm);
    instr_t i;
    i = '{op: op, bank_odd: odd, src_grf: grf, aam: aam, dst: dst, src: src, imm: imm};
    return i;
  endfunction

  task automatic hw(reg_region_e r, logic [1:0] alu, logic [4:0] idx, logic [255:0] d);
    @(negedge clk);
    reg_we_i = 1; reg_wregion_i = r; reg_walu_i = alu; reg_widx_i = idx; reg_wdata_i = d;
    @(negedge clk);
    reg_we_i = 0;
  endtask


  task automatic chk_arf(int a, int alu, int lane, int exp, string what);
    reg_rregion_i = REG_ARF; reg_ralu_i = 2'(alu);
    reg_ridx_i = 5'((a << 2) | (lane / 8)); #1;
    checks++;
    if (int'($signed(reg_rdata_o[(lane % 8)*32 +: 32])) != exp) begin
      failures++;
      $display("FAIL %s ARF%0d alu%0d lane%0d got %0d exp %0d", what, a, alu, lane,
               $signed(reg_rdata_o[(lane % 8)*32 +: 32]), exp);
    end
  endtask

  instr_t prog [32];
  int triggers;

  initial begin
    start_i = 0; trigger_i = 0; col_i = 0; bank_even_i = 0; bank_odd_i = 0;
    reg_we_i = 0; reg_wregion_i = REG_CRF; reg_walu_i = 0; reg_widx_i = 0; reg_wdata_i = 0;
    reg_rregion_i = REG_ARF; reg_ralu_i = 0; reg_ridx_i = 0;
    foreach (X[t, k]) X[t][k] = 8'($urandom);
    foreach (W[k, n]) W[k][n] = 8'($urandom);
    foreach (V[n]) V[n] = 8'($urandom);
    X[0][0] = -128; W[0][0] = -128;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // program
    foreach (prog[i]) prog[i] = mk(OP_NOP, 0, 0, 0, 0, 0, 0);
    prog[0] = mk(OP_MAC,  0, 0, 1, 4'd0, 4'd0, 0);
    prog[1] = mk(OP_JUMP, 0, 0, 0, 0, 0, {4'd0, 8'd15, 5'd0});
    prog[2] = mk(OP_FILL, 1, 0, 0, 4'd1, 0, 0);
    prog[3] = mk(OP_MAC,  0, 1, 0, 4'd1, 4'd1, 0);
    prog[4] = mk(OP_MUL,  0, 0, 0, 4'd2, 4'd3, 0);
    prog[5] = mk(OP_ADD,  0, 0, 0, 4'd3, 4'd2, 0);
    prog[6] = mk(OP_EXIT, 0, 0, 0, 0, 0, 0);
    for (int c = 0; c < 4; c++) begin
      logic [255:0] d;
      for (int i = 0; i < 8; i++) d[i*32 +: 32] = prog[c*8 + i];
      hw(REG_CRF, 0, 5'(c), d);
    end
    for (int k = 0; k < 16; k++) begin
      logic [255:0] d;
      d = '0;
      for (int t = 0; t < 4; t++) d[t*8 +: 8] = X[t][k];
      hw(REG_SRF, 0, 5'(k), d);
    end
    // CRF readback
    reg_rregion_i = REG_CRF; reg_ridx_i = 0; #1;
    checks++;
    if (reg_rdata_o[31:0] != 32'(prog[0])) begin failures++; $display("FAIL CRF readback"); end
    // run
    @(negedge clk); start_i = 1; @(negedge clk); start_i = 0;
    triggers = 0;
    while (!done_o && triggers < 40) begin
      repeat (3) @(negedge clk);
      if (done_o) break;
      col_i = COL_W'(triggers);
      for (int n = 0; n < 32; n++) begin
        bank_even_i[n*8 +: 8] = W[triggers][n];
        bank_odd_i[n*8 +: 8]  = V[n];
      end
      trigger_i = 1;
      @(negedge clk);
      trigger_i = 0;
      triggers++;
    end
    checks++;
    if (triggers != 20) begin failures++; $display("FAIL program took %0d triggers, expected 20", triggers); end
    // results
    for (int t = 0; t < 4; t++)
      for (int n = 0; n < 32; n++) begin
        int s;
        s = 0;
        for (int k = 0; k < 16; k++) s += int'(X[t][k]) * int'(W[k][n]);
        chk_arf(0, t, n, s, "GEMM");
        // trigger 17: MAC ARF1 += W[17] * GRF1 (= V)
        chk_arf(1, t, n, int'(W[17][n]) * int'(V[n]), "GRF MAC");
        chk_arf(2, t, n, int'(W[18][n]) * int'(X[t][3]), "MUL");
        chk_arf(3, t, n, int'(W[19][n]) + int'(X[t][2]), "ADD");
      end
    // GRF readback after FILL
    reg_rregion_i = REG_GRF; reg_ralu_i = 2; reg_ridx_i = 1; #1;
    checks++;
    if (reg_rdata_o[7:0] != V[0]) begin failures++; $display("FAIL GRF fill"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
