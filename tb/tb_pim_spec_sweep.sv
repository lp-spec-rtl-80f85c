// tb_pim_spec_sweep: speculation-length sweep on one LPDDR5-PIM die.
//
// The verification pass of speculative decoding multiplies every weight
// matrix by L_spec token vectors. The die computes a K = 8 input slice of
// such a layer for L_spec = 1, 4, 5, 16 and 32 (the range the design is
// evaluated over). Four tokens share one pass because each MPU has four
// ALUs, so a pass costs K column commands and a sweep point costs
// ceil(L_spec / 4) passes. For each pass the testbench:
//   - loads the four tokens' inputs into the SRFs in all-bank mode;
//   - switches to all-bank-PIM mode and issues K RD commands
//     (program: MUL, then MAC looped K-2 times, then EXIT);
//   - switches back to single-bank mode and reads the INT32 results of
//     MPU 0 and MPU 7 through the ARF window.
// Checks: every token's 8 output lanes in both MPUs equal a software GEMM,
// the number of PIM column commands is exactly ceil(L_spec/4) * K, and no
// DRAM timing rule is broken. The weights are written once and reused by all
// passes, as they stay resident in the PIM banks.
module tb_pim_spec_sweep;
  import lpspec_pkg::*;
  localparam int TCL = 12, TCWL = 6, KD = 8;
  localparam logic [ROW_W-1:0] WIN = {REG_ROW_TAG, 4'b0000};
  localparam int NL = 5;
  localparam int LS [NL] = '{1, 4, 5, 16, 32};

  logic clk = 0, rst_n = 0;
  ca_t  ca_i;
  logic cs_i;
  logic [255:0] wdata_i, rdata_o;
  logic wvalid_i, rvalid_o, timing_err_o, pim_exec_o, pim_done_o;
  mode_e mode_o;
  int checks = 0, failures = 0, terrs = 0, execs = 0;

  pim_die #(.TCL(TCL), .TCWL(TCWL)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (timing_err_o) terrs++;
    if (pim_exec_o)   execs++;
  end

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic idle(int n); repeat (n) @(negedge clk); endtask
  task automatic cmd(cmd_e c, int ba, int row, int col);
    @(negedge clk);
    ca_i = '{cmd: c, ba: BA_W'(ba), row: ROW_W'(row), col: COL_W'(col)}; cs_i = 1;
    @(negedge clk);
    ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0;
  endtask
  task automatic wr(int ba, int col, logic [255:0] d);
    cmd(CMD_WR, ba, 0, col);
    repeat (TCWL - 1) @(negedge clk);
    wdata_i = d; wvalid_i = 1;
    @(negedge clk); wvalid_i = 0;
    idle(3);
  endtask
  task automatic rd(int ba, int col, output logic [255:0] d);
    int g;
    cmd(CMD_RD, ba, 0, col);
    g = 0;
    while (!rvalid_o && g < 100) begin @(negedge clk); g++; end
    d = rdata_o;
  endtask
  task automatic act(int ba, int row); cmd(CMD_ACT, ba, row, 0); idle(16); endtask
  task automatic pre(int ba); idle(30); cmd(CMD_PRE, ba, 0, 0); idle(16); endtask

  function automatic instr_t mk(opcode_e op, logic [16:0] imm);
    return '{op: op, bank_odd: 1'b0, src_grf: 1'b0, aam: 1'b1, dst: 4'd0, src: 4'd0, imm: imm};
  endfunction
  function automatic logic [255:0] rnd();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  logic [255:0] W [KD], d;
  logic signed [7:0] X [32][KD];
  int passes, e0, bad;

  initial begin
    ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0; wdata_i = 0; wvalid_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weights (bank row 300, columns 0..KD-1 of every bank) and the program
    cmd(CMD_MRW, 0, 0, int'(MODE_AB)); idle(2);
    foreach (W[k]) W[k] = rnd();
    act(0, 300);
    for (int k = 0; k < KD; k++) wr(0, k, W[k]);
    pre(0);
    act(0, int'(WIN | 4'b0000));
    d = '0;
    d[31:0]   = mk(OP_MUL, 0);
    d[63:32]  = mk(OP_MAC, 0);
    d[95:64]  = mk(OP_JUMP, {4'd0, 8'(KD - 2), 5'd1});
    d[127:96] = mk(OP_EXIT, 0);
    wr(0, 0, d);
    pre(0);
    cmd(CMD_MRW, 0, 0, int'(MODE_SB)); idle(2);
    for (int s = 0; s < NL; s++) begin
      foreach (X[t, k]) X[t][k] = (t < LS[s]) ? 8'($urandom) : 8'd0;
      passes = (LS[s] + N_ALU - 1) / N_ALU;
      e0 = execs; bad = 0;
      for (int p = 0; p < passes; p++) begin
        cmd(CMD_MRW, 0, 0, int'(MODE_AB)); idle(2);
        act(0, int'(WIN | 4'b1000));                       // SRF[k] byte t = x[4p+t][k]
        for (int k = 0; k < KD; k++) begin
          d = '0;
          for (int t = 0; t < 4; t++) d[t*8 +: 8] = X[4*p + t][k];
          wr(0, k, d);
        end
        pre(0);
        cmd(CMD_MRW, 0, 0, int'(MODE_ABPIM)); idle(2);
        act(0, 300);
        for (int k = 0; k < KD; k++) begin cmd(CMD_RD, 0, 0, k); idle(2); end
        idle(2);
        chk($sformatf("L=%0d pass %0d done", LS[s], p), pim_done_o);
        pre(0);
        cmd(CMD_MRW, 0, 0, int'(MODE_SB)); idle(2);
        for (int m = 0; m < 8; m += 7)
          for (int t = 0; t < 4 && 4*p + t < LS[s]; t++) begin
            act(2*m, int'(WIN | 4'b1100 | 4'(t)));
            rd(2*m, 0, d);
            for (int n = 0; n < 8; n++) begin
              int acc;
              acc = 0;
              for (int k = 0; k < KD; k++) acc += int'(X[4*p + t][k]) * int'($signed(W[k][n*8 +: 8]));
              if (int'($signed(d[n*32 +: 32])) != acc) bad++;
            end
            pre(2*m);
          end
      end
      chk($sformatf("L=%0d: all %0d token results correct (%0d bad lanes)", LS[s], LS[s], bad), bad == 0);
      chk($sformatf("L=%0d: %0d PIM column commands == ceil(L/4)*K = %0d", LS[s], execs - e0, passes * KD),
          execs - e0 == passes * KD);
      $display("L_spec=%0d passes=%0d pim_column_commands=%0d", LS[s], passes, execs - e0);
    end
    chk("no timing violations", terrs == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
