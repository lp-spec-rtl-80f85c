// tb_lpddr5_rank: four dies in lockstep. A burst written to the rank is read
// back intact with TCL latency; die 1 receives DQ[31:16] of every beat; with
// CS low the rank ignores commands; a mode switch reaches all dies and an
// ABPIM program step runs on all of them at once.
module tb_lpddr5_rank;
  import lpspec_pkg::*;
  localparam int TCL = 12, TCWL = 6;
  logic clk = 0, rst_n = 0;
  ca_t ca_i;
  logic cs_i;
  logic [1023:0] wdata_i, rdata_o;
  logic wvalid_i, rvalid_o, timing_err_o, pim_exec_o, pim_done_o;
  int checks = 0, failures = 0, terrs = 0, reads = 0;

  lpddr5_rank #(.TCL(TCL), .TCWL(TCWL)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (timing_err_o) terrs++;
    if (rvalid_o) reads++;
  end

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cmd(cmd_e c, int ba, int row, int col, logic cs = 1);
    @(negedge clk);
    ca_i = '{cmd: c, ba: BA_W'(ba), row: ROW_W'(row), col: COL_W'(col)}; cs_i = cs;
    @(negedge clk);
    ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0;
  endtask

  logic [1023:0] d, r;
  logic [255:0] die1;
  int lat;

  initial begin
    ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0; wdata_i = 0; wvalid_i = 0;
    for (int i = 0; i < 32; i++) d[i*32 +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cmd(CMD_ACT, 1, 50, 0); repeat (16) @(negedge clk);
    cmd(CMD_WR, 1, 0, 2);
    repeat (TCWL - 1) @(negedge clk);
    wdata_i = d; wvalid_i = 1;
    #1;
    for (int n = 0; n < 16; n++) die1[n*16 +: 16] = d[n*64 + 16 +: 16];
    chk("die 1 receives DQ[31:16] of each beat", dut.g_die[1].wd == die1);
    @(negedge clk); wvalid_i = 0;
    repeat (4) @(negedge clk);
    cmd(CMD_RD, 1, 0, 2);
    lat = 1;
    while (!rvalid_o && lat < 50) begin @(negedge clk); lat++; end
    chk("burst readback", rdata_o == d);
    chk($sformatf("latency %0d", lat), lat == TCL);
    // CS low: ignored
    cmd(CMD_RD, 1, 0, 2, 1'b0);
    repeat (TCL + 4) @(negedge clk);
    chk("one read only", reads == 1);
    repeat (40) @(negedge clk);
    cmd(CMD_PRE, 1, 0, 0); repeat (16) @(negedge clk);
    // mode switch to ABPIM; programs are empty CRFs (NOPs): one step each
    cmd(CMD_MRW, 0, 0, int'(MODE_ABPIM));
    chk("all dies in ABPIM", dut.g_die[0].mode == MODE_ABPIM && dut.g_die[3].mode == MODE_ABPIM);
    cmd(CMD_ACT, 0, 60, 0); repeat (16) @(negedge clk);
    @(negedge clk);
    ca_i = '{cmd: CMD_RD, ba: '0, row: '0, col: '0}; cs_i = 1; #1;
    chk("PIM step in lockstep", dut.pexec == 4'hF);
    @(negedge clk); ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0;
    chk("no timing errors", terrs == 0);
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
