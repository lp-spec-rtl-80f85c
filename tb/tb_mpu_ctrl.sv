// tb_mpu_ctrl: runs a small program (MAC, NOP, JUMP x3 over two instructions,
// EXIT) through the controller and checks the issued PC sequence, the
// address-aligned operand index, that JUMP costs no trigger, EXIT and the
// miss report for a trigger after EXIT.
module tb_mpu_ctrl;
  import lpspec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start_i, trigger_i;
  logic [COL_W-1:0] col_i;
  instr_t prog [32];
  instr_t instr_i;
  logic [4:0] pc_o;
  logic exec_o, done_o, miss_o;
  logic [3:0] src_idx_o;
  int checks = 0, failures = 0;

  mpu_ctrl dut (.*);
  assign instr_i = prog[pc_o];
  always #5 clk = ~clk;

  function automatic instr_t mk(opcode_e op, logic aam, logic [3:0] src, logic [16:0] imm);
    instr_t i;
    i = '0; i.op = op; i.aam = aam; i.src = src; i.imm = imm;
    return i;
  endfunction

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (pc=%0d)", what, pc_o); end
  endtask

  int exp_pc [] = '{0, 1, 2, 1, 2, 1, 2, 1, 2, 4};
  initial begin
    for (int i = 0; i < 32; i++) prog[i] = mk(OP_NOP, 0, 0, 0);
    prog[0] = mk(OP_MAC, 1'b1, 4'd0, 0);
    prog[1] = mk(OP_MAC, 1'b0, 4'd9, 0);
    prog[2] = mk(OP_NOP, 1'b0, 4'd0, 0);
    prog[3] = mk(OP_JUMP, 1'b0, 4'd0, {4'd0, 8'd3, 5'd1});  // back to 1, three more times
    prog[4] = mk(OP_MUL, 1'b0, 4'd2, 0);
    prog[5] = mk(OP_EXIT, 1'b0, 4'd0, 0);
    start_i = 0; trigger_i = 0; col_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); chk("done after reset", done_o);
    start_i = 1; @(negedge clk); start_i = 0;
    chk("not done after start", !done_o);
    foreach (exp_pc[n]) begin
      // three idle cycles between triggers, like tCCD = 4
      repeat (3) @(negedge clk);
      col_i = COL_W'(n + 5);
      trigger_i = 1; #1;
      chk($sformatf("exec at step %0d", n), exec_o);
      chk($sformatf("pc %0d at step %0d", exp_pc[n], n), pc_o == 5'(exp_pc[n]));
      if (n == 0) chk("aam index from column", src_idx_o == 4'(n + 5));
      if (n == 1) chk("explicit index", src_idx_o == 4'd9);
      @(negedge clk); trigger_i = 0;
    end
    repeat (3) @(negedge clk);
    chk("done after EXIT", done_o);
    trigger_i = 1; #1;
    chk("miss after EXIT", miss_o && !exec_o);
    @(negedge clk); trigger_i = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
