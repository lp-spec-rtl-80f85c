// tb_dtp_tte: the token tree explorer on the example of the paper's scheduler
// figure (Decode Head 1: 0.5, 0.3; Decode Head 2: 0.2, 0.1).
//  a) PIM-bound (T grows every 4 tokens): the tree stops at t0, t1_1, t1_2 and
//     t2_1 under t1_1, expected acceptance 1.9 = 1 + 0.5 + 0.3 + 0.1.
//  b) NPU-bound (flat latency): all 7 nodes with non-zero expectation are kept.
//  c) latency SLO below the NPU time: only the root.
//  d) energy budget for 2 nodes, and e) a node limit of 3.
// The exploration time is checked against L(L+1)/2 + 2L + 2 cycles.
module tb_dtp_tte;
  import lpspec_pkg::*;
  localparam int H = 4, K = 4, MN = 32;
  logic clk = 0, rst_n = 0;
  logic start_i, busy_o, done_o;
  logic [H-1:0][K-1:0][PW-1:0] p_i;
  est_cfg_t cfg_i;
  logic [5:0] max_nodes_i, n_nodes_o;
  logic [PW+6-1:0] exp_len_o;
  logic [MN-1:0][4:0] parent_o;
  logic [MN-1:0][2:0] depth_o;
  logic [MN-1:0][1:0] rank_o;
  int checks = 0, failures = 0;

  dtp_tte #(.H(H), .K(K), .MAX_NODES(MN)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(int t_npu, int t_pim, int slo, int ef, int et, int eb, int maxn, output int cycles);
    @(negedge clk);
    cfg_i = '{t_npu: 24'(t_npu), t_pim_pass: 24'(t_pim), t_slo: 24'(slo),
              e_fixed: 24'(ef), e_token: 24'(et), e_budget: 24'(eb)};
    max_nodes_i = 6'(maxn);
    start_i = 1;
    @(negedge clk); start_i = 0;
    cycles = 1;
    while (!done_o && cycles < 2000) begin @(negedge clk); cycles++; end
  endtask

  function automatic int q(real x); return int'(x * 32768.0); endfunction

  int cyc, bound;
  initial begin
    start_i = 0; cfg_i = '0; max_nodes_i = 0; p_i = '0;
    p_i[0][0] = PW'(q(0.5)); p_i[0][1] = PW'(q(0.3));
    p_i[1][0] = PW'(q(0.2)); p_i[1][1] = PW'(q(0.1));
    repeat (2) @(posedge clk);
    rst_n = 1;
    // a) PIM-bound
    run(100, 100, 1000000, 0, 0, 1000000, 32, cyc);
    chk($sformatf("a: L_spec %0d == 4", n_nodes_o), n_nodes_o == 4);
    chk($sformatf("a: expected length %0d ~ 1.9", exp_len_o),
        int'(exp_len_o) >= q(1.9) - 4 && int'(exp_len_o) <= q(1.9) + 4);
    chk("a: node1 = t1_1", parent_o[1] == 0 && depth_o[1] == 1 && rank_o[1] == 0);
    chk("a: node2 = t1_2", parent_o[2] == 0 && depth_o[2] == 1 && rank_o[2] == 1);
    chk("a: node3 = t2_1 under t1_1", parent_o[3] == 1 && depth_o[3] == 2 && rank_o[3] == 0);
    bound = 4 * 5 / 2 + 2 * 4 + 2;
    chk($sformatf("a: %0d cycles <= %0d", cyc, bound), cyc <= bound);
    // b) NPU-bound
    run(300, 100, 1000000, 0, 0, 1000000, 32, cyc);
    chk($sformatf("b: L_spec %0d == 7", n_nodes_o), n_nodes_o == 7);
    chk("b: expected length ~ 2.04", int'(exp_len_o) >= q(2.04) - 8 && int'(exp_len_o) <= q(2.04) + 8);
    chk("b: 5th node is t2_1 under t1_2 (0.06)", parent_o[4] == 2 && rank_o[4] == 0);
    bound = 7 * 8 / 2 + 2 * 7 + 2;
    chk($sformatf("b: %0d cycles <= %0d", cyc, bound), cyc <= bound);
    // c) SLO
    run(300, 100, 250, 0, 0, 1000000, 32, cyc);
    chk("c: SLO keeps only the root", n_nodes_o == 1);
    // d) energy budget: E(L) = 10 + 10 L <= 35 -> L <= 2
    run(300, 100, 1000000, 10, 10, 35, 32, cyc);
    chk($sformatf("d: energy budget L_spec %0d == 2", n_nodes_o), n_nodes_o == 2);
    // e) node limit
    run(300, 100, 1000000, 0, 0, 1000000, 3, cyc);
    chk("e: node limit", n_nodes_o == 3 && parent_o[2] == 0 && rank_o[2] == 1);
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
