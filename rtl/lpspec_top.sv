// lpspec_top: LP-Spec hybrid LPDDR5-PIM memory module with its scheduler.
//
// The memory side is the paper's main configuration: N_PIM = 3 PIM ranks and
// N_DRAM = 1 DRAM rank of four 1 GB x16 dies each (16 GB), behind the near-data
// memory controller (NMC). The SoC (host CPU and mobile NPU, not part of this
// RTL) reaches the module through the NMC's SoC-side ports: a DRAM C/A bus, a
// PIM C/A bus, chip selects per rank, the 2-bit tag and a 64-bit DQ bus carried
// as 16-beat bursts (1024 bits per column command). PIM ranks share the PIM C/A
// bus and DQ lines; DRAM ranks share the DRAM ones; read data of the ranks on a
// bus is merged (only the selected rank drives).
//
// The LP-Spec scheduler (draft token pruner and data allocation unit), which
// the paper places in the host, is included as a block of its own: it takes
// verification results, emits the pruned token tree and L_spec, and streams
// the weight blocks to migrate; the NPU that turns those into copy-write reads
// is outside, so those signals are ports of this top.
//
// Status outputs: timing_err_o pulses when any die sees a DRAM timing
// violation, pim_done_o is high when every MPU of every PIM rank has reached
// EXIT, pim_exec_o pulses per PIM instruction step, copy_wr_o per copy WR the
// NMC issues, gbuf_rank_o per burst between PIM buffer and PIM ranks, and
// nmc_err_o is the NMC's sticky collision flag.
//
// Lint notes: the DRAM ranks have no MPUs, so their pim_exec/pim_done outputs
// are unused. rst_n is reported as used both asynchronously and synchronously;
// the synchronous use is only the disable-iff of the assertions.
module lpspec_top
  import lpspec_pkg::*;
#(
  parameter int unsigned N_PIM        = 3,
  parameter int unsigned N_DRAM       = 1,
  parameter int unsigned DIES         = 4,
  parameter int unsigned TCL          = 12,
  parameter int unsigned TCWL         = 6,
  parameter int unsigned H            = 4,
  parameter int unsigned K            = 4,
  parameter int unsigned MAX_NODES    = 32,
  parameter int unsigned N_GROUPS     = 8,
  parameter int unsigned GROUP_SIZE   = 4,
  parameter int unsigned TOTAL_BLOCKS = 4096,
  localparam int unsigned BURST = DIES * 16 * 16,
  localparam int unsigned NW = $clog2(MAX_NODES + 1),
  localparam int unsigned IW = $clog2(MAX_NODES),
  localparam int unsigned HW = $clog2(H + 1),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1,
  localparam int unsigned BW = $clog2(TOTAL_BLOCKS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ---- SoC memory interface (PHY side of the NMC) ----
  input  logic [1:0]                    tag_i,
  input  ca_t                           dram_ca_i,
  input  logic [N_DRAM-1:0]             dram_cs_i,
  input  ca_t                           pim_ca_i,
  input  logic [N_PIM-1:0]              pim_cs_i,
  input  logic [BURST-1:0]              host_wdata_i,
  input  logic                          host_wvalid_i,
  output logic [BURST-1:0]              host_rdata_o,
  output logic                          host_rvalid_o,
  output logic                          timing_err_o,
  output logic                          pim_done_o,
  output logic                          pim_exec_o,
  output logic                          copy_wr_o,
  output logic                          gbuf_rank_o,
  output logic                          nmc_err_o,
  // ---- scheduler ----
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
  input  logic                          ver_valid,
  input  logic [HW-1:0]                 ver_acc_len,
  input  logic [H-1:0][KW-1:0]          ver_acc_rank,
  input  logic                          explore_i,
  output logic                          tree_valid,
  output logic                          tte_busy,
  output logic [NW-1:0]                 l_spec,
  output logic [PW+NW-1:0]              exp_len,
  output logic [MAX_NODES-1:0][IW-1:0]  tree_parent,
  output logic [MAX_NODES-1:0][HW-1:0]  tree_depth,
  output logic [MAX_NODES-1:0][KW-1:0]  tree_rank,
  output logic [GW-1:0]                 group_o,
  output logic [BW-1:0]                 boundary_o,
  output logic [N_GROUPS-1:0][1:0]      cnt_o,
  output logic                          dau_activate,
  output logic                          mig_valid,
  input  logic                          mig_ready,
  output logic [BW-1:0]                 mig_block,
  output logic                          mig_to_pim
);
  // ---------------- NMC ----------------
  ca_t                dram_ca, pim_ca;
  logic [N_DRAM-1:0]  dram_cs;
  logic [N_PIM-1:0]   pim_cs;
  logic [BURST-1:0]   dram_wd, pim_wd, dram_rd, pim_rd;
  logic               dram_wv, pim_wv, dram_rv, pim_rv;

  nmc #(.N_PIM(N_PIM), .N_DRAM(N_DRAM), .BURST(BURST), .TCL(TCL), .TCWL(TCWL)) u_nmc (
    .clk, .rst_n, .tag_i, .dram_ca_i, .dram_cs_i, .pim_ca_i, .pim_cs_i,
    .host_wdata_i, .host_wvalid_i, .host_rdata_o, .host_rvalid_o,
    .dram_ca_o(dram_ca), .dram_cs_o(dram_cs), .dram_wdata_o(dram_wd), .dram_wvalid_o(dram_wv),
    .dram_rdata_i(dram_rd), .dram_rvalid_i(dram_rv),
    .pim_ca_o(pim_ca), .pim_cs_o(pim_cs), .pim_wdata_o(pim_wd), .pim_wvalid_o(pim_wv),
    .pim_rdata_i(pim_rd), .pim_rvalid_i(pim_rv),
    .copy_wr_o, .gbuf_rank_o, .err_o(nmc_err_o));

  // ---------------- PIM ranks ----------------
  logic [BURST-1:0] p_rd [N_PIM];
  logic [N_PIM-1:0] p_rv, p_terr, p_exec, p_done;
  for (genvar r = 0; r < N_PIM; r++) begin : g_pim_rank
    lpddr5_rank #(.HAS_PIM(1'b1), .DIES(DIES), .TCL(TCL), .TCWL(TCWL)) u_rank (
      .clk, .rst_n, .ca_i(pim_ca), .cs_i(pim_cs[r]), .wdata_i(pim_wd), .wvalid_i(pim_wv),
      .rdata_o(p_rd[r]), .rvalid_o(p_rv[r]), .timing_err_o(p_terr[r]),
      .pim_exec_o(p_exec[r]), .pim_done_o(p_done[r]));
  end

  // ---------------- DRAM ranks ----------------
  logic [BURST-1:0]  d_rd [N_DRAM];
  logic [N_DRAM-1:0] d_rv, d_terr, d_exec, d_done;
  for (genvar r = 0; r < N_DRAM; r++) begin : g_dram_rank
    lpddr5_rank #(.HAS_PIM(1'b0), .DIES(DIES), .TCL(TCL), .TCWL(TCWL)) u_rank (
      .clk, .rst_n, .ca_i(dram_ca), .cs_i(dram_cs[r]), .wdata_i(dram_wd), .wvalid_i(dram_wv),
      .rdata_o(d_rd[r]), .rvalid_o(d_rv[r]), .timing_err_o(d_terr[r]),
      .pim_exec_o(d_exec[r]), .pim_done_o(d_done[r]));
  end

  // Read data merge: a rank that is not reading drives nothing (masked).
  always_comb begin
    pim_rd = '0;
    for (int r = 0; r < int'(N_PIM); r++) if (p_rv[r]) pim_rd |= p_rd[r];
    dram_rd = '0;
    for (int r = 0; r < int'(N_DRAM); r++) if (d_rv[r]) dram_rd |= d_rd[r];
  end
  assign pim_rv  = |p_rv;
  assign dram_rv = |d_rv;

  assign timing_err_o = (|p_terr) || (|d_terr);
  assign pim_done_o   = &p_done;
  assign pim_exec_o   = |p_exec;

  // ---------------- scheduler ----------------
  lpspec_scheduler #(.H(H), .K(K), .MAX_NODES(MAX_NODES), .N_GROUPS(N_GROUPS),
                     .GROUP_SIZE(GROUP_SIZE), .TOTAL_BLOCKS(TOTAL_BLOCKS)) u_sched (
    .clk, .rst_n, .cfg_i, .max_nodes_i, .p_we, .p_head, .p_rank, .p_val,
    .tbl_we, .tbl_idx, .tbl_pim, .tbl_dram,
    .ver_valid, .ver_acc_len, .ver_acc_rank, .explore_i,
    .tree_valid, .tte_busy, .l_spec, .exp_len, .tree_parent, .tree_depth, .tree_rank,
    .group_o, .boundary_o, .cnt_o, .dau_activate, .mig_valid, .mig_ready, .mig_block, .mig_to_pim);

  // Only one rank of a bus may return read data at a time.
  a_one_pim_reader: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(p_rv));
  a_one_dram_reader: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(d_rv));
endmodule
