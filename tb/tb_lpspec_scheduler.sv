// tb_lpspec_scheduler: the closed loop verifier -> accuracy model -> token
// tree explorer -> data allocation unit.
//  - with the paper's example rates and a PIM-bound estimator the first tree
//    has L_spec = 4 and the DAU stays in group 0;
//  - the estimator is then made NPU-bound: after each verification result a
//    new tree of 7 nodes follows (L_spec group 1), and the DAU activates on the
//    second consecutive step, moving the boundary 682 -> 819 and streaming
//    137 blocks from PIM to DRAM;
//  - the accuracy update from the verification results is visible in the rates.
module tb_lpspec_scheduler;
  import lpspec_pkg::*;
  localparam int H = 4, K = 4, MN = 32;
  logic clk = 0, rst_n = 0;
  est_cfg_t cfg_i;
  logic [5:0] max_nodes_i, l_spec;
  logic p_we, tbl_we, ver_valid, explore_i, tree_valid, tte_busy, dau_activate;
  logic mig_valid, mig_ready, mig_to_pim;
  logic [2:0] p_head, ver_acc_len, tbl_idx, group_o;
  logic [1:0] p_rank;
  logic [PW-1:0] p_val;
  logic [3:0] tbl_pim, tbl_dram;
  logic [H-1:0][1:0] ver_acc_rank;
  logic [PW+6-1:0] exp_len;
  logic [MN-1:0][4:0] tree_parent;
  logic [MN-1:0][2:0] tree_depth;
  logic [MN-1:0][1:0] tree_rank;
  logic [12:0] boundary_o, mig_block;
  logic [7:0][1:0] cnt_o;
  int checks = 0, failures = 0, trees = 0, acts = 0, migs = 0;
  int last_l;

  lpspec_scheduler dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (tree_valid) begin trees++; last_l = int'(l_spec); end
    if (dau_activate) acts++;
    if (mig_valid && mig_ready) migs++;
  end

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wait_tree();
    int g, t0;
    g = 0; t0 = trees;
    while (trees == t0 && g < 2000) begin @(negedge clk); g++; end
  endtask

  task automatic setp(int h, int k, real v);
    @(negedge clk); p_we = 1; p_head = 3'(h); p_rank = 2'(k); p_val = PW'(int'(v * 32768.0));
    @(negedge clk); p_we = 0;
  endtask

  initial begin
    cfg_i = '{t_npu: 24'd100, t_pim_pass: 24'd100, t_slo: 24'd1000000, e_fixed: 0, e_token: 0,
              e_budget: 24'd1000000};
    max_nodes_i = 6'd32; p_we = 0; p_head = 0; p_rank = 0; p_val = 0;
    tbl_we = 0; tbl_idx = 0; tbl_pim = 0; tbl_dram = 0;
    ver_valid = 0; ver_acc_len = 0; ver_acc_rank = '0; explore_i = 0; mig_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    setp(0, 0, 0.5); setp(0, 1, 0.3); setp(1, 0, 0.2); setp(1, 1, 0.1);
    @(negedge clk); explore_i = 1; @(negedge clk); explore_i = 0;
    wait_tree();
    chk($sformatf("first tree L_spec %0d == 4", last_l), last_l == 4);
    chk("DAU idle in group 0", acts == 0 && group_o == 0);
    // NPU-bound from now on
    cfg_i.t_npu = 24'd300;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk);
      ver_valid = 1; ver_acc_len = 3'd1; ver_acc_rank = '0;   // head 1 top-1 accepted, head 2 rejected
      @(negedge clk); ver_valid = 0;
      wait_tree();
      chk($sformatf("step %0d: tree of 7 (got %0d)", s, last_l), last_l == 7);
    end
    @(negedge clk);
    chk("rate of head 1 top-1 rose", int'(dut.p[0][0]) > 16384);
    chk("rate of head 2 top-1 fell", int'(dut.p[1][0]) < 6554);
    chk("DAU activated once", acts == 1 && group_o == 1 && boundary_o == 819);
    repeat (300) @(negedge clk);
    chk($sformatf("137 blocks streamed (%0d)", migs), migs == 137);
    chk("direction PIM -> DRAM", mig_to_pim == 1'b0);
    $display("trees=%0d activations=%0d migrated=%0d", trees, acts, migs);
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
