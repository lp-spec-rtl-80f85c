// lpspec_scheduler: the LP-Spec workload scheduler, draft token pruner (DTP)
// plus data allocation unit (DAU), closed around the verifier.
//
// Each decoding step the verifier reports its result (ver_*). The accuracy
// model updates the per-head rates at that edge; the next cycle the token tree
// explorer starts from the updated rates and the estimator configuration and
// builds the pruned tree for the following step. When it finishes, the tree
// (parent/depth/rank of every node) and its size L_spec are presented to the
// host, and L_spec is handed to the DAU, which may re-balance the DRAM/PIM
// weight split and stream the blocks to migrate. explore_i starts an
// exploration without an update (for example after preloading rates).
// This wiring follows the paper's scheduler framework figure.
//
// Lint notes: the DAU's busy flag is not needed here (mig_valid carries the same
// information to the SoC) and stays unconnected.
module lpspec_scheduler
  import lpspec_pkg::*;
#(
  parameter int unsigned H            = 4,
  parameter int unsigned K            = 4,
  parameter int unsigned MAX_NODES    = 32,
  parameter int unsigned N_GROUPS     = 8,
  parameter int unsigned GROUP_SIZE   = 4,
  parameter int unsigned TOTAL_BLOCKS = 4096,
  localparam int unsigned NW = $clog2(MAX_NODES + 1),
  localparam int unsigned IW = $clog2(MAX_NODES),
  localparam int unsigned HW = $clog2(H + 1),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1,
  localparam int unsigned BW = $clog2(TOTAL_BLOCKS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  est_cfg_t                      cfg_i,
  input  logic [NW-1:0]                 max_nodes_i,
  input  logic                          p_we,
  input  logic [HW-1:0]                 p_head,
  input  logic [KW-1:0]                 p_rank,
  input  logic [PW-1:0]                 p_val,
  input  logic                          tbl_we,
  input  logic [GW-1:0]                 tbl_idx,
  input  logic [3:0]                    tbl_pim,
  input  logic [3:0]                    tbl_dram,
  // verification results
  input  logic                          ver_valid,
  input  logic [HW-1:0]                 ver_acc_len,
  input  logic [H-1:0][KW-1:0]          ver_acc_rank,
  input  logic                          explore_i,
  // optimized token tree
  output logic                          tree_valid,
  output logic                          tte_busy,
  output logic [NW-1:0]                 l_spec,
  output logic [PW+NW-1:0]              exp_len,
  output logic [MAX_NODES-1:0][IW-1:0]  tree_parent,
  output logic [MAX_NODES-1:0][HW-1:0]  tree_depth,
  output logic [MAX_NODES-1:0][KW-1:0]  tree_rank,
  // data allocation
  output logic [GW-1:0]                 group_o,
  output logic [BW-1:0]                 boundary_o,
  output logic [N_GROUPS-1:0][1:0]      cnt_o,
  output logic                          dau_activate,
  output logic                          mig_valid,
  input  logic                          mig_ready,
  output logic [BW-1:0]                 mig_block,
  output logic                          mig_to_pim
);
  logic [H-1:0][K-1:0][PW-1:0] p;
  logic start_q, dau_busy;

  dtp_accuracy #(.H(H), .K(K)) u_acc (
    .clk, .rst_n, .wr_en(p_we), .wr_head(p_head), .wr_rank(p_rank), .wr_p(p_val),
    .upd_valid(ver_valid), .acc_len(ver_acc_len), .acc_rank(ver_acc_rank), .p_o(p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_q <= 1'b0;
    else        start_q <= ver_valid || explore_i;
  end

  dtp_tte #(.H(H), .K(K), .MAX_NODES(MAX_NODES)) u_tte (
    .clk, .rst_n, .start_i(start_q), .p_i(p), .cfg_i, .max_nodes_i,
    .busy_o(tte_busy), .done_o(tree_valid), .n_nodes_o(l_spec), .exp_len_o(exp_len),
    .parent_o(tree_parent), .depth_o(tree_depth), .rank_o(tree_rank));

  dau #(.N_GROUPS(N_GROUPS), .GROUP_SIZE(GROUP_SIZE), .TOTAL_BLOCKS(TOTAL_BLOCKS), .TW(NW)) u_dau (
    .clk, .rst_n, .tbl_we, .tbl_idx, .tbl_pim, .tbl_dram,
    .ntok_valid(tree_valid), .ntok(l_spec),
    .group_o, .boundary_o, .cnt_o, .activate_o(dau_activate), .busy_o(dau_busy),
    .mig_valid, .mig_ready, .mig_block, .mig_to_pim);
endmodule
