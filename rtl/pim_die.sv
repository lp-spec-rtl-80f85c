// pim_die: one x16 LPDDR5(-PIM) die of the hybrid memory module.
//
// The die holds 16 banks and, when HAS_PIM is set, 8 matrix processing units
// (one per bank pair) behind the PIM control logic; with HAS_PIM = 0 the same
// model is a plain DRAM die of a DRAM rank. It works at the command level: one
// C/A bundle per cycle (qualified by CS), one 256-bit column burst per RD/WR
// (16 beats of 16 DQ bits).
//
// Modes, set through the mode register (CMD_MRW, col[1:0]):
//   SB     normal single-bank access.
//   AB     all-bank: ACT/PRE/WR act on all 16 banks at once, so one write
//          broadcasts the same data to every bank (input broadcast for the
//          column-wise weight partition); writes into the register window load
//          the CRF/GRF/SRF of all MPUs at once.
//   ABPIM  all-bank PIM: every RD or WR triggers one instruction in every MPU;
//          each MPU reads the column from its two banks at their open row. No
//          data moves on DQ in this mode. Entering ABPIM restarts the programs.
// The register window is any row whose top ROW_W-4 bits are all ones:
// row[3:2] picks CRF/GRF/SRF/ARF, row[1:0] the ALU slot, col[4:0] the index.
// In SB mode RD/WR there reach the MPU of bank ba (ba/2); that is how the host
// reads the INT32 results out of the ARF.
//
// Timing: read data leaves TCL cycles after the RD; write data is taken
// TCWL cycles after the WR (wvalid_i must be high then). The
// JEDEC-style constraints of the paper's Table II (tRP, tRCD, tRAS, tRRD, tWR,
// tRC, tCCD, tFAW, in clock cycles) are checked: each violation pulses
// timing_err_o. tCL and tCWL are not given by the paper and are parameters.
// The mode-register encoding and the register window are this design's own.
//
// Lint notes: the row bits below the register-window tag are decoded elsewhere,
// so the window test leaves them unused; MPU program counters and miss flags
// are observation points for testbenches, and in a die built without MPUs
// (HAS_PIM = 0) the start/trigger strobes have no consumer.
module pim_die
  import lpspec_pkg::*;
#(
  parameter bit          HAS_PIM = 1'b1,
  parameter int unsigned TCL     = 12,
  parameter int unsigned TCWL    = 6,
  parameter int unsigned T_RP    = 15,
  parameter int unsigned T_RCD   = 15,
  parameter int unsigned T_RAS   = 34,
  parameter int unsigned T_RRD   = 4,
  parameter int unsigned T_WR    = 28,
  parameter int unsigned T_RC    = 30,
  parameter int unsigned T_CCD   = 4,
  parameter int unsigned T_FAW   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  ca_t                 ca_i,
  input  logic                cs_i,
  input  logic [COL_BITS-1:0] wdata_i,
  input  logic                wvalid_i,
  output logic [COL_BITS-1:0] rdata_o,
  output logic                rvalid_o,
  output mode_e               mode_o,
  output logic                timing_err_o,
  output logic                pim_exec_o,   // instructions issued this cycle (MPU 0)
  output logic                pim_done_o    // every MPU reached EXIT
);
  // ---------------- command decode ----------------
  ca_t   ca;
  mode_e mode;
  logic  is_act, is_pre, is_rd, is_wr, is_mrw, all_bank;

  assign ca       = cs_i ? ca_i : '{cmd: CMD_NOP, default: '0};
  assign is_act   = ca.cmd == CMD_ACT;
  assign is_pre   = ca.cmd == CMD_PRE;
  assign is_rd    = ca.cmd == CMD_RD;
  assign is_wr    = ca.cmd == CMD_WR;
  assign is_mrw   = ca.cmd == CMD_MRW;
  assign all_bank = mode != MODE_SB;
  assign mode_o   = mode;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                mode <= MODE_SB;
    else if (is_mrw && HAS_PIM) mode <= mode_e'(ca.col[1:0]);
  end

  // ---------------- row state ----------------
  logic             open_q [BANKS];
  logic [ROW_W-1:0] row_q  [BANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < int'(BANKS); b++) begin open_q[b] <= 1'b0; row_q[b] <= '0; end
    end else begin
      for (int b = 0; b < int'(BANKS); b++) begin
        if (is_act && (all_bank || ca.ba == BA_W'(b))) begin open_q[b] <= 1'b1; row_q[b] <= ca.row; end
        if (is_pre && (all_bank || ca.ba == BA_W'(b))) open_q[b] <= 1'b0;
      end
    end
  end

  // ---------------- timing checker ----------------
  logic [31:0] now;
  logic [31:0] t_act [BANKS];
  logic [31:0] t_pre [BANKS];
  logic [31:0] t_wre [BANKS];   // cycle the last write data landed
  logic [31:0] t_act_any, t_col;
  logic [31:0] act_hist [4];
  logic        terr;

  always_comb begin
    terr = 1'b0;
    if (is_act) begin
      if (now - t_pre[ca.ba] < T_RP)  terr = 1'b1;
      if (now - t_act[ca.ba] < T_RC)  terr = 1'b1;
      if (now - t_act_any    < T_RRD) terr = 1'b1;
      if (now - act_hist[3]  < T_FAW) terr = 1'b1;
      if (open_q[ca.ba])              terr = 1'b1;
    end
    if (is_rd || is_wr) begin
      if (now - t_act[ca.ba] < T_RCD) terr = 1'b1;
      if (now - t_col        < T_CCD) terr = 1'b1;
      if (!open_q[ca.ba])             terr = 1'b1;
    end
    if (is_pre) begin
      if (now - t_act[ca.ba] < T_RAS) terr = 1'b1;
      if (now - t_wre[ca.ba] < T_WR)  terr = 1'b1;
    end
  end
  assign timing_err_o = terr;

  // Timestamps start far in the past so the first commands are legal.
  localparam logic [31:0] T0 = 32'd4096;

  logic wr_land;                 // write data lands this cycle
  logic [BA_W-1:0] wr_land_ba;
  logic            wr_land_all;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= T0; t_act_any <= '0; t_col <= '0;
      for (int b = 0; b < int'(BANKS); b++) begin t_act[b] <= '0; t_pre[b] <= '0; t_wre[b] <= '0; end
      for (int i = 0; i < 4; i++) act_hist[i] <= '0;
    end else begin
      now <= now + 32'd1;
      if (is_act) begin
        t_act_any   <= now;
        act_hist[0] <= now;
        for (int i = 1; i < 4; i++) act_hist[i] <= act_hist[i-1];
      end
      if (is_rd || is_wr) t_col <= now;
      for (int b = 0; b < int'(BANKS); b++) begin
        if (is_act && (all_bank || ca.ba == BA_W'(b))) t_act[b] <= now;
        if (is_pre && (all_bank || ca.ba == BA_W'(b))) t_pre[b] <= now;
        if (wr_land && (wr_land_all || wr_land_ba == BA_W'(b))) t_wre[b] <= now;
      end
    end
  end

  // ---------------- banks ----------------
  logic [COL_BITS-1:0] bank_rd [BANKS];
  logic                bank_we [BANKS];
  logic [ROW_W-1:0]    wr_row;
  logic [COL_W-1:0]    wr_col;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    dram_bank #(.ROW_W(ROW_W), .COL_W(COL_W), .DW(COL_BITS)) u_bank (
      .clk, .we(bank_we[b]), .wrow(wr_row), .wcol(wr_col), .wdata(wdata_i),
      .rrow(row_q[b]), .rcol(ca.col), .rdata(bank_rd[b]));
  end

  // ---------------- register window decode ----------------
  function automatic logic in_window(input logic [ROW_W-1:0] r);
    return HAS_PIM && (r[ROW_W-1:4] == REG_ROW_TAG);
  endfunction

  // ---------------- write pipeline (WR -> data after TCWL) ----------------
  typedef struct packed {
    logic             v;
    logic             all;
    logic [BA_W-1:0]  ba;
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
  } wpipe_t;

  wpipe_t wp [TCWL];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(TCWL); i++) wp[i] <= '0;
    end else begin
      wp[0] <= '{v: is_wr && mode != MODE_ABPIM, all: all_bank, ba: ca.ba, row: row_q[ca.ba], col: ca.col};
      for (int i = 1; i < int'(TCWL); i++) wp[i] <= wp[i-1];
    end
  end

  wpipe_t wl;
  assign wl          = wp[TCWL-1];
  assign wr_land     = wl.v && wvalid_i;
  assign wr_land_ba  = wl.ba;
  assign wr_land_all = wl.all;
  assign wr_row      = wl.row;
  assign wr_col      = wl.col;

  logic wl_reg;
  assign wl_reg = in_window(wl.row);

  always_comb begin
    for (int b = 0; b < int'(BANKS); b++)
      bank_we[b] = wr_land && !wl_reg && (wl.all || wl.ba == BA_W'(b));
  end

  // ---------------- read pipeline (RD -> data after TCL) ----------------
  logic [COL_BITS-1:0] rp_d [TCL];
  logic                rp_v [TCL];
  logic [COL_BITS-1:0] rd_now;
  logic [COL_BITS-1:0] reg_rdata [MPUS];

  always_comb begin
    if (in_window(row_q[ca.ba])) rd_now = reg_rdata[ca.ba[BA_W-1:1]];
    else                         rd_now = bank_rd[ca.ba];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(TCL); i++) begin rp_v[i] <= 1'b0; rp_d[i] <= '0; end
    end else begin
      rp_v[0] <= is_rd && mode != MODE_ABPIM;
      rp_d[0] <= rd_now;
      for (int i = 1; i < int'(TCL); i++) begin rp_v[i] <= rp_v[i-1]; rp_d[i] <= rp_d[i-1]; end
    end
  end
  assign rvalid_o = rp_v[TCL-1];
  assign rdata_o  = rp_d[TCL-1];

  // ---------------- MPUs ----------------
  logic pim_start, pim_trig;
  assign pim_start = is_mrw && HAS_PIM && mode_e'(ca.col[1:0]) == MODE_ABPIM && mode != MODE_ABPIM;
  assign pim_trig  = (is_rd || is_wr) && mode == MODE_ABPIM;

  if (HAS_PIM) begin : g_pim
    logic mpu_done [MPUS];
    logic mpu_exec [MPUS];
    for (genvar m = 0; m < MPUS; m++) begin : g_mpu
      logic       we_m;
      logic       miss_m;
      logic [4:0] pc_m;
      assign we_m = wr_land && wl_reg && (wl.all || wl.ba[BA_W-1:1] == (BA_W-1)'(m));
      mpu u_mpu (
        .clk, .rst_n,
        .start_i(pim_start), .trigger_i(pim_trig), .col_i(ca.col),
        .bank_even_i(bank_rd[2*m]), .bank_odd_i(bank_rd[2*m+1]),
        .reg_we_i(we_m), .reg_wregion_i(reg_region_e'(wl.row[3:2])),
        .reg_walu_i(wl.row[1:0]), .reg_widx_i(wl.col[4:0]), .reg_wdata_i(wdata_i),
        .reg_rregion_i(reg_region_e'(row_q[ca.ba][3:2])), .reg_ralu_i(row_q[ca.ba][1:0]),
        .reg_ridx_i(ca.col[4:0]), .reg_rdata_o(reg_rdata[m]),
        .exec_o(mpu_exec[m]), .done_o(mpu_done[m]), .miss_o(miss_m), .pc_o(pc_m));
    end
    always_comb begin
      pim_done_o = 1'b1;
      for (int m = 0; m < int'(MPUS); m++) pim_done_o &= mpu_done[m];
    end
    assign pim_exec_o = mpu_exec[0];
  end else begin : g_nopim
    for (genvar m = 0; m < MPUS; m++) begin : g_z
      assign reg_rdata[m] = '0;
    end
    assign pim_done_o = 1'b0;
    assign pim_exec_o = 1'b0;
  end

  // Only the mode values defined in the package may be written.
  a_mode: assert property (@(posedge clk) disable iff (!rst_n)
    is_mrw && HAS_PIM |-> ca.col[1:0] != 2'd3);
  // Write data must be present when a write lands.
  a_wdata: assert property (@(posedge clk) disable iff (!rst_n) wl.v |-> wvalid_i);
endmodule
