// tb_lpspec_top: end-to-end run of the whole module at its default size
// (3 PIM ranks + 1 DRAM rank, 4 x16 dies per rank, 8 MPUs per die) with no
// parameter override. The testbench plays the SoC: it drives both C/A buses,
// the tag, the DQ bus and the scheduler inputs, and keeps DRAM timing legal
// except in the one place where a violation is wanted.
//   A. DRAM rank: normal write/read of a burst (4 dies, DQ slices checked).
//   B. A RD right after ACT on the DRAM rank: the die timing checker must flag it.
//   C. PIM GEMM on all three PIM ranks at once: SB -> AB (broadcast weights and
//      load CRF/SRF through the register window) -> ABPIM (four RD commands run
//      the loop) -> SB; DRAM reads run on the other bus while the MPUs execute;
//      INT32 results of MPU 0 in every die of PIM rank 1 are read back and
//      compared with a software GEMM.
//   D. PIM global buffer: partial sums move PIM rank 2 -> buffer, the SoC reads
//      them from the buffer, and the buffer writes them into PIM rank 0.
//   E. Scheduler: draft-token tree exploration with the paper's example rates,
//      then an NPU-bound estimator for two verification rounds; the DAU
//      activates and streams 137 blocks PIM -> DRAM, each moved with a
//      copy-write RD on the PIM bus (data also reaches the SoC); one
//      copy-write in the other direction (DRAM -> PIM) follows.
// Each mechanism is counted from the design's status outputs or internal mode
// registers; a mechanism that never happened is a failure, as is any NMC
// collision error.
module tb_lpspec_top;
  import lpspec_pkg::*;
  localparam int TCL = 12, TCWL = 6, B = 1024, NP = 3, MN = 32;
  localparam logic [ROW_W-1:0] WIN = {REG_ROW_TAG, 4'b0000};

  logic clk = 0, rst_n = 0;
  logic [1:0] tag_i;
  ca_t dram_ca_i, pim_ca_i;
  logic [0:0] dram_cs_i;
  logic [NP-1:0] pim_cs_i;
  logic [B-1:0] host_wdata_i, host_rdata_o;
  logic host_wvalid_i, host_rvalid_o, timing_err_o, pim_done_o, pim_exec_o;
  logic copy_wr_o, gbuf_rank_o, nmc_err_o;
  est_cfg_t cfg_i;
  logic [5:0] max_nodes_i, l_spec;
  logic p_we, tbl_we, ver_valid, explore_i, tree_valid, tte_busy, dau_activate;
  logic mig_valid, mig_ready, mig_to_pim;
  logic [2:0] p_head, ver_acc_len, tbl_idx, group_o;
  logic [1:0] p_rank;
  logic [PW-1:0] p_val;
  logic [3:0] tbl_pim, tbl_dram;
  logic [3:0][1:0] ver_acc_rank;
  logic [PW+6-1:0] exp_len;
  logic [MN-1:0][4:0] tree_parent;
  logic [MN-1:0][2:0] tree_depth;
  logic [MN-1:0][1:0] tree_rank;
  logic [12:0] boundary_o, mig_block;
  logic [7:0][1:0] cnt_o;

  lpspec_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int checks = 0, failures = 0;
  int n_terr = 0, n_exec = 0, n_copy = 0, n_gbuf = 0, n_tree = 0, n_act = 0, n_mig = 0;
  int n_mode = 0, n_dram_conc = 0, n_hostrd = 0, n_stall = 0;
  mode_e mode_prev;
  logic [B-1:0] rq [$];
  always @(posedge clk) if (rst_n) begin
    if (timing_err_o) n_terr++;
    if (pim_exec_o)   n_exec++;
    if (copy_wr_o)    n_copy++;
    if (gbuf_rank_o)  n_gbuf++;
    if (tree_valid)   n_tree++;
    if (dau_activate) n_act++;
    if (mig_valid && mig_ready) n_mig++;
    if (mig_valid && !mig_ready) n_stall++;     // migration waits for the SoC
    if (host_rvalid_o) begin n_hostrd++; rq.push_back(host_rdata_o); end
    if (dut.g_pim_rank[0].u_rank.g_die[0].mode != mode_prev) n_mode++;
    mode_prev <= dut.g_pim_rank[0].u_rank.g_die[0].mode;
    if (dram_ca_i.cmd != CMD_NOP && !dut.pim_done_o && mode_prev == MODE_ABPIM) n_dram_conc++;
  end

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic clear();
    tag_i = 0; dram_ca_i = '{cmd: CMD_NOP, default: '0}; pim_ca_i = '{cmd: CMD_NOP, default: '0};
    dram_cs_i = 0; pim_cs_i = 0;
  endtask

  task automatic idle(int n); repeat (n) @(negedge clk); endtask

  // one command on one bus (pim=1: PIM bus with CS mask cs; pim=0: DRAM bus)
  task automatic cmd(logic pim, logic [1:0] tag, cmd_e c, int cs, int ba, int row, int col);
    @(negedge clk);
    tag_i = tag;
    if (pim) begin pim_ca_i = '{cmd: c, ba: 4'(ba), row: ROW_W'(row), col: 6'(col)}; pim_cs_i = NP'(cs); end
    else     begin dram_ca_i = '{cmd: c, ba: 4'(ba), row: ROW_W'(row), col: 6'(col)}; dram_cs_i = 1'(cs); end
    @(negedge clk); clear();
  endtask

  task automatic wr(logic pim, logic [1:0] tag, int cs, int ba, int col, logic [B-1:0] d);
    cmd(pim, tag, CMD_WR, cs, ba, 0, col);
    repeat (TCWL - 1) @(negedge clk);
    host_wdata_i = d; host_wvalid_i = 1;
    @(negedge clk); host_wvalid_i = 0;
    idle(3);
  endtask

  task automatic rd(logic pim, logic [1:0] tag, int cs, int ba, int col, output logic [B-1:0] d);
    rq.delete();
    cmd(pim, tag, CMD_RD, cs, ba, 0, col);
    idle(TCL + 3);
    if (rq.size() == 1) d = rq.pop_front();
    else begin d = 'x; chk($sformatf("one SoC read burst (got %0d)", rq.size()), 1'b0); end
  endtask

  // open / close a row with legal spacing
  task automatic act(logic pim, logic [1:0] tag, int cs, int ba, int row);
    cmd(pim, tag, CMD_ACT, cs, ba, row, 0); idle(16);
  endtask
  task automatic pre(logic pim, int cs, int ba);
    idle(30); cmd(pim, 2'b00, CMD_PRE, cs, ba, 0, 0); idle(16);
  endtask

  // DQ mapping: die d drives DQ[16d+15:16d], beat n carries die bits [16n+15:16n]
  function automatic logic [B-1:0] pack(logic [3:0][255:0] w);
    logic [B-1:0] b;
    for (int n = 0; n < 16; n++)
      for (int d = 0; d < 4; d++) b[n*64 + d*16 +: 16] = w[d][n*16 +: 16];
    return b;
  endfunction
  function automatic logic [255:0] die_of(logic [B-1:0] b, int d);
    logic [255:0] w;
    for (int n = 0; n < 16; n++) w[n*16 +: 16] = b[n*64 + d*16 +: 16];
    return w;
  endfunction
  function automatic logic [B-1:0] rnd();
    logic [B-1:0] v;
    for (int i = 0; i < B / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  function automatic logic [B-1:0] blk_data(int b);
    logic [B-1:0] v;
    for (int i = 0; i < B / 32; i++) v[i*32 +: 32] = 32'(b * 40503 + i * 977);
    return v;
  endfunction
  function automatic instr_t mk(opcode_e op, logic aam, logic [16:0] imm);
    return '{op: op, bank_odd: 1'b0, src_grf: 1'b0, aam: aam, dst: 4'd0, src: 4'd0, imm: imm};
  endfunction

  logic [B-1:0] a, r, W [4], psum;
  logic [3:0][255:0] dw;
  logic signed [7:0] X [4][4];
  int terr0, bad, bank_of, col_of;

  task automatic setp(int h, int k, real v);
    @(negedge clk); p_we = 1; p_head = 3'(h); p_rank = 2'(k); p_val = PW'(int'(v * 32768.0));
    @(negedge clk); p_we = 0;
  endtask

  initial begin
    clear(); host_wdata_i = 0; host_wvalid_i = 0; mode_prev = MODE_SB;
    cfg_i = '{t_npu: 24'd100, t_pim_pass: 24'd100, t_slo: 24'd1000000, e_fixed: 0, e_token: 0,
              e_budget: 24'd1000000};
    max_nodes_i = 6'd32; p_we = 0; p_head = 0; p_rank = 0; p_val = 0;
    tbl_we = 0; tbl_idx = 0; tbl_pim = 0; tbl_dram = 0;
    ver_valid = 0; ver_acc_len = 0; ver_acc_rank = '0; explore_i = 0; mig_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    idle(2);

    // ---- A. DRAM rank normal access ----
    a = rnd();
    act(0, 2'b00, 1, 1, 50);
    wr(0, 2'b00, 1, 1, 5, a);
    rd(0, 2'b00, 1, 1, 5, r);
    chk("DRAM rank readback", r == a);
    chk("die 0 holds its DQ slice",
        dut.g_dram_rank[0].u_rank.g_die[0].u_die.g_bank[1].u_bank.mem[{15'd50, 6'd5}] == die_of(a, 0));
    chk("die 3 holds its DQ slice",
        dut.g_dram_rank[0].u_rank.g_die[3].u_die.g_bank[1].u_bank.mem[{15'd50, 6'd5}] == die_of(a, 3));
    pre(0, 1, 1);
    chk("no timing error in legal DRAM traffic", n_terr == 0);

    // ---- B. timing violation on the DRAM rank ----
    cmd(0, 2'b00, CMD_ACT, 1, 2, 60, 0);
    rd(0, 2'b00, 1, 2, 0, r);
    chk("tRCD violation detected", n_terr > 0);
    pre(0, 1, 2);
    terr0 = n_terr;

    // ---- C. PIM GEMM on all PIM ranks ----
    cmd(1, 2'b00, CMD_MRW, 3'b111, 0, 0, int'(MODE_AB)); idle(2);
    foreach (W[k]) W[k] = rnd();
    act(1, 2'b00, 3'b111, 0, 300);
    for (int k = 0; k < 4; k++) wr(1, 2'b00, 3'b111, 0, k, W[k]);
    pre(1, 3'b111, 0);
    act(1, 2'b00, 3'b111, 0, int'(WIN | 4'b0000));            // CRF
    dw = '0;
    dw[0][31:0]  = mk(OP_MAC, 1'b1, 0);
    dw[0][63:32] = mk(OP_JUMP, 1'b0, {4'd0, 8'd3, 5'd0});
    dw[0][95:64] = mk(OP_EXIT, 1'b0, 0);
    for (int d = 1; d < 4; d++) dw[d] = dw[0];
    wr(1, 2'b00, 3'b111, 0, 0, pack(dw));
    pre(1, 3'b111, 0);
    foreach (X[t, k]) X[t][k] = 8'($urandom);
    act(1, 2'b00, 3'b111, 0, int'(WIN | 4'b1000));            // SRF
    for (int k = 0; k < 4; k++) begin
      dw = '0;
      for (int d = 0; d < 4; d++) for (int t = 0; t < 4; t++) dw[d][t*8 +: 8] = X[t][k];
      wr(1, 2'b00, 3'b111, 0, k, pack(dw));
    end
    pre(1, 3'b111, 0);
    cmd(1, 2'b00, CMD_MRW, 3'b111, 0, 0, int'(MODE_ABPIM)); idle(2);
    chk("programs restarted on entering ABPIM", !pim_done_o);
    act(1, 2'b00, 3'b111, 0, 300);
    act(0, 2'b00, 1, 1, 50);                                    // DRAM row for concurrent reads
    fork
      for (int k = 0; k < 4; k++) begin cmd(1, 2'b00, CMD_RD, 3'b111, 0, 0, k); idle(4); end
      begin idle(1); rd(0, 2'b00, 1, 1, 5, r); end
    join
    idle(3);
    chk("concurrent DRAM read during PIM execution", r == a);
    chk("PIM done after 4 column commands", pim_done_o);
    pre(1, 3'b111, 0);
    pre(0, 1, 1);
    cmd(1, 2'b00, CMD_MRW, 3'b111, 0, 0, int'(MODE_SB)); idle(2);
    bad = 0;
    for (int t = 0; t < 4; t++) begin
      act(1, 2'b00, 3'b010, 0, int'(WIN | 4'b1100 | 4'(t)));
      rd(1, 2'b00, 3'b010, 0, 0, r);
      for (int d = 0; d < 4; d++) for (int n = 0; n < 8; n++) begin
        int s;
        s = 0;
        for (int k = 0; k < 4; k++) s += int'(X[t][k]) * int'($signed(die_of(W[k], d)[n*8 +: 8]));
        if (int'($signed(die_of(r, d)[n*32 +: 32])) != s) bad++;
      end
      pre(1, 3'b010, 0);
    end
    chk($sformatf("GEMM results of rank 1 (%0d mismatches of 128)", bad), bad == 0);

    // ---- D. PIM global buffer ----
    act(1, 2'b10, 3'b100, 0, int'(WIN | 4'b1100));              // ACT-1: bank bits 0
    cmd(1, 2'b10, CMD_RD, 3'b100, 0, 0, 0);                     // rank 2 -> buffer {0,0,0}
    idle(TCL + 4);
    rd(1, 2'b10, 0, 0, 0, psum);                                // SoC reads buffer {0,0,0}
    chk("buffer holds rank 2 partial sums (= rank 1 results)",
        int'($signed(die_of(psum, 0)[31:0])) ==
        int'(X[0][0]) * int'($signed(die_of(W[0], 0)[7:0])) + int'(X[0][1]) * int'($signed(die_of(W[1], 0)[7:0])) +
        int'(X[0][2]) * int'($signed(die_of(W[2], 0)[7:0])) + int'(X[0][3]) * int'($signed(die_of(W[3], 0)[7:0])));
    pre(1, 3'b100, 0);
    act(1, 2'b10, 3'b001, 0, 70);                                // ACT-1 again, normal row in rank 0
    cmd(1, 2'b10, CMD_WR, 3'b001, 0, 0, 9);                      // buffer {0,0,0} -> rank 0 col 9
    idle(TCWL + 4);
    rd(1, 2'b00, 3'b001, 0, 9, r);
    chk("rank 0 received the buffer burst", r == psum);
    pre(1, 3'b001, 0);
    chk("two buffer <-> rank transfers", n_gbuf == 2);

    // ---- E. scheduler, DAU and copy-write migration ----
    for (int b = 640; b < 832; b += 64) begin                    // banks 10..12, row 400 on both sides
      act(1, 2'b00, 3'b001, b / 64, 400);
      act(0, 2'b00, 1, b / 64, 400);
    end
    for (int b = 682; b < 819; b++) wr(1, 2'b00, 3'b001, b / 64, b % 64, blk_data(b));
    setp(0, 0, 0.5); setp(0, 1, 0.3); setp(1, 0, 0.2); setp(1, 1, 0.1);
    @(negedge clk); explore_i = 1; @(negedge clk); explore_i = 0;
    wait (n_tree == 1); idle(2);
    chk($sformatf("first tree L_spec %0d == 4", l_spec), l_spec == 4);
    cfg_i.t_npu = 24'd300;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk); ver_valid = 1; ver_acc_len = 3'd1; ver_acc_rank = '0;
      @(negedge clk); ver_valid = 0;
      wait (n_tree == s + 2); idle(2);
      chk($sformatf("round %0d tree L_spec %0d == 7", s, l_spec), l_spec == 7);
    end
    chk("DAU activated", n_act == 1 && boundary_o == 819 && !mig_to_pim);
    bad = 0;
    while (mig_valid) begin
      bank_of = int'(mig_block) / 64; col_of = int'(mig_block) % 64;
      idle(3);                                                   // SoC busy: stall the stream
      rq.delete();
      @(negedge clk);
      tag_i = 2'b01; dram_cs_i = 1;
      pim_ca_i = '{cmd: CMD_RD, ba: 4'(bank_of), row: '0, col: 6'(col_of)}; pim_cs_i = 3'b001;
      mig_ready = 1;
      @(negedge clk); clear(); mig_ready = 0;
      idle(TCL + 3);
      if (rq.size() != 1 || rq[0] != blk_data(bank_of * 64 + col_of)) bad++;
    end
    chk($sformatf("137 blocks migrated (%0d), SoC saw each (%0d bad)", n_mig, bad), n_mig == 137 && bad == 0);
    chk("137 copy WRs", n_copy == 137);
    for (int b = 682; b < 819; b += 17) begin
      rd(0, 2'b00, 1, b / 64, b % 64, r);
      chk($sformatf("DRAM holds migrated block %0d", b), r == blk_data(b));
    end
    // one copy in the other direction: DRAM bank 10 col 0 -> PIM rank 0
    wr(0, 2'b00, 1, 10, 0, blk_data(9999));
    @(negedge clk);
    tag_i = 2'b01; dram_ca_i = '{cmd: CMD_RD, ba: 4'd10, row: '0, col: 6'd0}; dram_cs_i = 1; pim_cs_i = 3'b001;
    @(negedge clk); clear();
    idle(TCL + 4);
    rd(1, 2'b00, 3'b001, 10, 0, r);
    chk("DRAM -> PIM copy-write", r == blk_data(9999) && n_copy == 138);
    for (int b = 640; b < 832; b += 64) begin pre(1, 3'b001, b / 64); pre(0, 1, b / 64); end

    // ---- summary ----
    chk("no timing errors outside phase B", n_terr == terr0);
    chk("no NMC collision", !nmc_err_o);
    $display("mechanisms: mode_switches=%0d pim_instr=%0d concurrent_dram_cmds=%0d copy_writes=%0d",
             n_mode, n_exec, n_dram_conc, n_copy);
    $display("            gbuf_transfers=%0d timing_errors=%0d trees=%0d dau_activations=%0d",
             n_gbuf, n_terr, n_tree, n_act);
    $display("            migrated_blocks=%0d migration_stalls=%0d soc_reads=%0d",
             n_mig, n_stall, n_hostrd);
    chk("mechanism: mode switch", n_mode >= 3);
    chk("mechanism: PIM execution", n_exec >= 4);
    chk("mechanism: DRAM access during PIM execution", n_dram_conc > 0);
    chk("mechanism: copy-write", n_copy > 0);
    chk("mechanism: PIM buffer transfer", n_gbuf > 0);
    chk("mechanism: timing violation detected", n_terr > 0);
    chk("mechanism: token tree exploration", n_tree >= 3);
    chk("mechanism: DAU activation", n_act > 0);
    chk("mechanism: migration stall", n_stall > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
