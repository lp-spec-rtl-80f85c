// tb_pim_die: one LPDDR5-PIM die at the command level.
//  1. SB mode: ACT/WR/RD/PRE with legal timing; read data appears TCL cycles
//     after the RD; no timing error is reported.
//  2. A RD right after ACT (tRCD violated) must raise timing_err_o.
//  3. AB mode: one WR broadcasts to all 16 banks; register-window writes load
//     the CRF and SRF of all 8 MPUs.
//  4. ABPIM mode: four RD commands run a 4-step GEMM (MAC in address-aligned
//     mode, looped) in all MPUs; pim_done_o rises; the INT32 results are read
//     back in SB mode through the ARF window of MPU 0 and MPU 7.
module tb_pim_die;
  import lpspec_pkg::*;
  localparam int TCL = 12, TCWL = 6;
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

  localparam logic [ROW_W-1:0] WIN = {REG_ROW_TAG, 4'b0000};

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic idle(int n); repeat (n) @(negedge clk); endtask

  task automatic cmd(cmd_e c, int ba, int row, int col);
    @(negedge clk);
    ca_i = '{cmd: c, ba: BA_W'(ba), row: ROW_W'(row), col: COL_W'(col)}; cs_i = 1;
    @(posedge clk);
    @(negedge clk);
    ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0;
  endtask

  // WR with its data TCWL cycles later
  task automatic wr(int ba, int col, logic [255:0] d);
    @(negedge clk);
    ca_i = '{cmd: CMD_WR, ba: BA_W'(ba), row: '0, col: COL_W'(col)}; cs_i = 1;
    @(posedge clk);
    @(negedge clk); ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0;
    repeat (TCWL - 1) @(negedge clk);
    wdata_i = d; wvalid_i = 1;
    @(negedge clk); wvalid_i = 0;
  endtask

  // RD; returns the data and the latency in cycles
  task automatic rd(int ba, int col, output logic [255:0] d, output int lat);
    @(negedge clk);
    ca_i = '{cmd: CMD_RD, ba: BA_W'(ba), row: '0, col: COL_W'(col)}; cs_i = 1;
    @(posedge clk);
    lat = 0;
    @(negedge clk); ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0;
    while (!rvalid_o && lat < 100) begin @(negedge clk); lat++; end
    lat++;   // consumer samples at the next edge
    d = rdata_o;
  endtask

  function automatic logic [255:0] rnd();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic instr_t mk(opcode_e op, logic aam, logic [3:0] dst, logic [16:0] imm);
    instr_t i;
    i = '{op: op, bank_odd: 1'b0, src_grf: 1'b0, aam: aam, dst: dst, src: 4'd0, imm: imm};
    return i;
  endfunction

  logic [255:0] d, d1, W [4];
  logic signed [7:0] X [4][4];
  int lat, terr_before;

  initial begin
    ca_i = '{cmd: CMD_NOP, default: '0}; cs_i = 0; wdata_i = 0; wvalid_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- 1. SB access ----
    d = rnd();
    cmd(CMD_ACT, 3, 100, 0); idle(16);
    wr(3, 5, d); idle(4);
    rd(3, 5, d1, lat);
    chk("SB readback", d1 == d);
    chk($sformatf("read latency %0d == TCL", lat), lat == TCL);
    idle(40);
    cmd(CMD_PRE, 3, 0, 0); idle(16);
    chk("no timing error in legal sequence", terrs == 0);
    // ---- 2. tRCD violation ----
    cmd(CMD_ACT, 4, 7, 0);
    rd(4, 0, d1, lat);
    chk("tRCD violation reported", terrs == 1);
    idle(40); cmd(CMD_PRE, 4, 0, 0); idle(16);
    terr_before = terrs;
    // ---- 3. AB mode broadcast and register loading ----
    cmd(CMD_MRW, 0, 0, int'(MODE_AB)); idle(2);
    chk("mode AB", mode_o == MODE_AB);
    foreach (W[k]) W[k] = rnd();
    cmd(CMD_ACT, 0, 300, 0); idle(16);
    for (int k = 0; k < 4; k++) begin wr(0, k, W[k]); idle(4); end
    idle(30); cmd(CMD_PRE, 0, 0, 0); idle(16);
    // CRF: MAC ARF0 += bank * SRF[col] (aam); JUMP x3 to 0; EXIT
    cmd(CMD_ACT, 0, int'(WIN | 4'b0000), 0); idle(16);
    d = '0;
    d[31:0]  = mk(OP_MAC, 1'b1, 4'd0, 0);
    d[63:32] = mk(OP_JUMP, 1'b0, 4'd0, {4'd0, 8'd3, 5'd0});
    d[95:64] = mk(OP_EXIT, 1'b0, 4'd0, 0);
    wr(0, 0, d); idle(30); cmd(CMD_PRE, 0, 0, 0); idle(16);
    // SRF[k] = X[0..3][k]
    foreach (X[t, k]) X[t][k] = 8'($urandom);
    cmd(CMD_ACT, 0, int'(WIN | 4'b1000), 0); idle(16);
    for (int k = 0; k < 4; k++) begin
      d = '0;
      for (int t = 0; t < 4; t++) d[t*8 +: 8] = X[t][k];
      wr(0, k, d); idle(4);
    end
    idle(30); cmd(CMD_PRE, 0, 0, 0); idle(16);
    // ---- 4. ABPIM execution ----
    cmd(CMD_MRW, 0, 0, int'(MODE_ABPIM)); idle(2);
    chk("mode ABPIM", mode_o == MODE_ABPIM);
    chk("programs restarted", !pim_done_o);
    cmd(CMD_ACT, 0, 300, 0); idle(16);
    for (int k = 0; k < 4; k++) begin cmd(CMD_RD, 0, 0, k); idle(2); end
    idle(3);
    chk("pim done after 4 column commands", pim_done_o);
    chk($sformatf("4 instructions issued (%0d)", execs), execs == 4);
    idle(30); cmd(CMD_PRE, 0, 0, 0); idle(16);
    cmd(CMD_MRW, 0, 0, int'(MODE_SB)); idle(2);
    // check the broadcast reached bank 15
    cmd(CMD_ACT, 15, 300, 0); idle(16);
    rd(15, 2, d1, lat);
    chk("AB broadcast reached bank 15", d1 == W[2]);
    idle(30); cmd(CMD_PRE, 15, 0, 0); idle(16);
    // results of MPU 0 (bank 0/1) and MPU 7 (bank 14/15), ARF0 slice 0 (lanes 0..7)
    for (int m = 0; m < 8; m += 7) begin
      for (int t = 0; t < 4; t++) begin
        cmd(CMD_ACT, 2*m, int'(WIN | 4'b1100 | 4'(t)), 0); idle(16);
        rd(2*m, 0, d1, lat);
        for (int n = 0; n < 8; n++) begin
          int s;
          s = 0;
          for (int k = 0; k < 4; k++) s += int'(X[t][k]) * int'($signed(W[k][n*8 +: 8]));
          chk($sformatf("MPU%0d token %0d col %0d = %0d (got %0d)", m, t, n, s,
                        $signed(d1[n*32 +: 32])), int'($signed(d1[n*32 +: 32])) == s);
        end
        idle(30); cmd(CMD_PRE, 2*m, 0, 0); idle(16);
      end
    end
    chk("no further timing errors", terrs == terr_before);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
