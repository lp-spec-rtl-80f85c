// nmc: near-data memory controller of the hybrid LPDDR5-PIM module.
//
// The SoC drives two independent command/address buses, one for the DRAM ranks
// and one for the PIM ranks, so PIM computation and normal DRAM access proceed
// in parallel; both share one 64-bit DQ bus toward the SoC, because the SoC
// only talks to one memory space at a time. A 2-bit tag travels with every
// command:
//   00  normal read/write on either side.
//   01  copy-write: an RD on one side is a normal read (the data still goes to
//       the SoC, so the NPU computes with it) and is also written into the
//       other side's ranks. The NMC issues that WR itself, tCL - tCWL cycles
//       after the RD (the Delay block), so the write-data window of the target
//       coincides with the read burst of the source; the data is fed forward
//       from the read-data path to the write-data arbiter, never via the SoC.
//   1x  on the DRAM side: normal access. On the PIM side: PIM global buffer
//       access. The 9-bit buffer address is {bank bits of the last ACT sent with
//       a 1x tag (ACT-1), bank bits of the RD/WR, tag[0]}. A PIM RD moves the
//       burst from the PIM ranks into the buffer, a PIM WR moves it from the
//       buffer into the PIM ranks, neither touching the SoC DQ bus. With no PIM
//       chip select raised, RD/WR instead read/fill the buffer from the SoC.
// The tag meanings and the ACT-1/RD/WR address split follow the paper. The
// choice of the copy target's chip select (the other bus's CS lines sampled
// with the RD), the no-CS host access to the buffer, and the same bank/column
// address for source and target of a copy are this design's own.
//
// The NMC tracks which PIM ranks it has put into all-bank-PIM mode; a RD/WR
// to those ranks is an MPU trigger and no read or write data is expected.
// Buffer transfers (tag 1x) are meant for ranks in SB or AB mode.
//
// Timing (cycles of the command clock): C/A and CS pass through one register
// stage (C/A buffers), so ranks see a command one cycle after the SoC. Host
// write data arrives TCWL after its WR and is registered once (Wdata buffer);
// rank read data is registered once (Rdata buffer) before the SoC, so the SoC
// sees read data TCL + 2 cycles after its RD. err_o is sticky and flags a
// collision the SoC should have avoided: two reads returning in one cycle, a
// SoC command on the bus slot a copy WR needs, or two buffer writes at once.
//
// Lint notes: DRAM-side trackers carry a buffer address field that is never
// used, because the PIM global buffer is reached only from the PIM side; the
// field is kept so both sides share one tracker type.
module nmc
  import lpspec_pkg::*;
#(
  parameter int unsigned N_PIM   = 3,
  parameter int unsigned N_DRAM  = 1,
  parameter int unsigned BURST   = 1024,
  parameter int unsigned TCL     = 12,
  parameter int unsigned TCWL    = 6,
  parameter int unsigned GBUF_WORDS = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // SoC side (behind the PHY)
  input  logic [1:0]        tag_i,
  input  ca_t               dram_ca_i,
  input  logic [N_DRAM-1:0] dram_cs_i,
  input  ca_t               pim_ca_i,
  input  logic [N_PIM-1:0]  pim_cs_i,
  input  logic [BURST-1:0]  host_wdata_i,
  input  logic              host_wvalid_i,
  output logic [BURST-1:0]  host_rdata_o,
  output logic              host_rvalid_o,
  // DRAM ranks
  output ca_t               dram_ca_o,
  output logic [N_DRAM-1:0] dram_cs_o,
  output logic [BURST-1:0]  dram_wdata_o,
  output logic              dram_wvalid_o,
  input  logic [BURST-1:0]  dram_rdata_i,
  input  logic              dram_rvalid_i,
  // PIM ranks
  output ca_t               pim_ca_o,
  output logic [N_PIM-1:0]  pim_cs_o,
  output logic [BURST-1:0]  pim_wdata_o,
  output logic              pim_wvalid_o,
  input  logic [BURST-1:0]  pim_rdata_i,
  input  logic              pim_rvalid_i,
  // status
  output logic              copy_wr_o,   // a copy WR leaves the Delay block
  output logic              gbuf_rank_o, // a burst moves between buffer and PIM ranks
  output logic              err_o
);
  localparam int unsigned AW = $clog2(GBUF_WORDS);
  localparam int unsigned D  = TCL - TCWL;   // copy-write delay

  typedef enum logic [2:0] {RK_NONE, RK_HOST, RK_COPY, RK_GBUF, RK_GBUF_HOST} rkind_e;
  typedef enum logic [1:0] {WK_NONE, WK_HOST, WK_GBUF, WK_HOST_GBUF} wkind_e;

  typedef struct packed { rkind_e k; logic [AW-1:0] a; } rp_t;
  typedef struct packed { wkind_e k; logic [AW-1:0] a; } wp_t;
  typedef struct packed {
    logic                v;
    logic                to_pim;
    logic [BA_W-1:0]     ba;
    logic [COL_W-1:0]    col;
    logic [N_PIM+N_DRAM-1:0] cs;
  } cp_t;

  // ---------------- command classification ----------------
  logic d_rd, d_wr, p_act, p_rd, p_wr, p_cs_any;
  assign d_rd     = (|dram_cs_i) && dram_ca_i.cmd == CMD_RD;
  assign d_wr     = (|dram_cs_i) && dram_ca_i.cmd == CMD_WR;
  assign p_cs_any = |pim_cs_i;
  assign p_act    = pim_ca_i.cmd == CMD_ACT;
  assign p_rd     = pim_ca_i.cmd == CMD_RD;
  assign p_wr     = pim_ca_i.cmd == CMD_WR;

  // The NMC keeps a copy of each PIM rank's mode (it issues the MRWs): in
  // all-bank-PIM mode a RD/WR only triggers the MPUs and moves no data.
  logic [N_PIM-1:0] p_abpim;
  logic             p_trig;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p_abpim <= '0;
    else if (pim_ca_i.cmd == CMD_MRW)
      for (int r = 0; r < int'(N_PIM); r++)
        if (pim_cs_i[r]) p_abpim[r] <= mode_e'(pim_ca_i.col[1:0]) == MODE_ABPIM;
  end
  assign p_trig = p_cs_any && ((pim_cs_i & ~p_abpim) == '0);

  logic [BA_W-1:0] act1_ba;     // bank bits of the last ACT-1 with a 1x tag
  logic [AW-1:0]   gaddr;
  assign gaddr = AW'({act1_ba, pim_ca_i.ba, tag_i[0]});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                               act1_ba <= '0;
    else if (p_act && tag_i[1])              act1_ba <= pim_ca_i.ba;
  end

  rp_t d_rnew, p_rnew;
  wp_t d_wnew, p_wnew;
  cp_t c_new;

  always_comb begin
    d_rnew = '{k: RK_NONE, a: '0};
    p_rnew = '{k: RK_NONE, a: '0};
    d_wnew = '{k: WK_NONE, a: '0};
    p_wnew = '{k: WK_NONE, a: '0};
    c_new  = '0;
    // DRAM side: tag 1x behaves as normal access
    if (d_rd) begin
      if (tag_i == TAG_COPY) begin
        d_rnew.k = RK_COPY;
        c_new    = '{v: 1'b1, to_pim: 1'b1, ba: dram_ca_i.ba, col: dram_ca_i.col,
                     cs: (N_PIM+N_DRAM)'(pim_cs_i)};
      end else d_rnew.k = RK_HOST;
    end
    if (d_wr) d_wnew.k = WK_HOST;
    // PIM side
    if (p_rd) begin
      if (tag_i[1])              p_rnew = '{k: p_cs_any ? RK_GBUF : RK_GBUF_HOST, a: gaddr};
      else if (!p_cs_any || p_trig) p_rnew.k = RK_NONE;
      else if (tag_i == TAG_COPY) begin
        p_rnew.k = RK_COPY;
        c_new    = '{v: 1'b1, to_pim: 1'b0, ba: pim_ca_i.ba, col: pim_ca_i.col,
                     cs: (N_PIM+N_DRAM)'(dram_cs_i)};
      end else                   p_rnew.k = RK_HOST;
    end
    if (p_wr) begin
      if (tag_i[1])              p_wnew = '{k: p_cs_any ? WK_GBUF : WK_HOST_GBUF, a: gaddr};
      else if (p_cs_any && !p_trig) p_wnew.k = WK_HOST;
    end
  end

  // ---------------- pending read / write trackers ----------------
  rp_t d_rp [TCL+1];
  rp_t p_rp [TCL+1];
  wp_t d_wp [TCWL];
  wp_t p_wp [TCWL];
  cp_t cdl  [D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= int'(TCL); i++) begin d_rp[i] <= '0; p_rp[i] <= '0; end
      for (int i = 0; i < int'(TCWL); i++) begin d_wp[i] <= '0; p_wp[i] <= '0; end
      for (int i = 0; i < int'(D); i++) cdl[i] <= '0;
    end else begin
      d_rp[0] <= d_rnew; p_rp[0] <= p_rnew;
      d_wp[0] <= d_wnew; p_wp[0] <= p_wnew;
      cdl[0]  <= c_new;
      for (int i = 1; i <= int'(TCL); i++) begin d_rp[i] <= d_rp[i-1]; p_rp[i] <= p_rp[i-1]; end
      for (int i = 1; i < int'(TCWL); i++) begin d_wp[i] <= d_wp[i-1]; p_wp[i] <= p_wp[i-1]; end
      for (int i = 1; i < int'(D); i++) cdl[i] <= cdl[i-1];
    end
  end

  // Entries leave the read trackers when the rank data arrives (TCL+1 after
  // the SoC command), the write trackers when SoC write data arrives (TCWL)
  // and the Delay block D cycles after the copy RD.
  rp_t d_ra, p_ra;
  wp_t d_wa, p_wa;
  cp_t c_out;
  assign d_ra  = d_rp[TCL];
  assign p_ra  = p_rp[TCL];
  assign d_wa  = d_wp[TCWL-1];
  assign p_wa  = p_wp[TCWL-1];
  assign c_out = cdl[D-1];

  // ---------------- PIM global buffer ----------------
  logic             g_we;
  logic [AW-1:0]    g_wa;
  logic [BURST-1:0] g_wd, g_rd_rank, g_rd_host;

  pim_gbuf #(.WORDS(GBUF_WORDS), .BL(BURST/64)) u_gbuf (
    .clk, .rst_n, .we(g_we), .waddr(g_wa), .wdata(g_wd),
    .raddr0(p_wa.a), .rdata0(g_rd_rank), .raddr1(p_ra.a), .rdata1(g_rd_host));

  logic g_conflict;
  always_comb begin
    g_we = 1'b0; g_wa = '0; g_wd = '0; g_conflict = 1'b0;
    if (p_ra.k == RK_GBUF) begin
      g_we = 1'b1; g_wa = p_ra.a; g_wd = pim_rdata_i;
    end
    if (p_wa.k == WK_HOST_GBUF) begin
      g_conflict = g_we;
      g_we = 1'b1; g_wa = p_wa.a; g_wd = host_wdata_i;
    end
  end

  // ---------------- C/A buffers with copy-WR injection ----------------
  logic copy_clash;
  assign copy_clash = c_out.v && (c_out.to_pim ? (pim_ca_i.cmd != CMD_NOP && p_cs_any)
                                               : (dram_ca_i.cmd != CMD_NOP && |dram_cs_i));
  assign copy_wr_o  = c_out.v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dram_ca_o <= '{cmd: CMD_NOP, default: '0}; dram_cs_o <= '0;
      pim_ca_o  <= '{cmd: CMD_NOP, default: '0}; pim_cs_o  <= '0;
    end else begin
      dram_ca_o <= dram_ca_i; dram_cs_o <= dram_cs_i;
      pim_ca_o  <= pim_ca_i;  pim_cs_o  <= pim_cs_i;
      if (c_out.v && c_out.to_pim) begin
        pim_ca_o <= '{cmd: CMD_WR, ba: c_out.ba, row: '0, col: c_out.col};
        pim_cs_o <= c_out.cs[N_PIM-1:0];
      end
      if (c_out.v && !c_out.to_pim) begin
        dram_ca_o <= '{cmd: CMD_WR, ba: c_out.ba, row: '0, col: c_out.col};
        dram_cs_o <= c_out.cs[N_DRAM-1:0];
      end
    end
  end

  // ---------------- Wdata buffers ----------------
  logic [BURST-1:0] d_wbuf, p_wbuf;
  logic             d_wbuf_v, p_wbuf_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_wbuf <= '0; p_wbuf <= '0; d_wbuf_v <= 1'b0; p_wbuf_v <= 1'b0;
    end else begin
      d_wbuf_v <= d_wa.k == WK_HOST;
      d_wbuf   <= host_wdata_i;
      p_wbuf_v <= p_wa.k == WK_HOST || p_wa.k == WK_GBUF;
      p_wbuf   <= (p_wa.k == WK_GBUF) ? g_rd_rank : host_wdata_i;
    end
  end

  // ---------------- data arbiter ----------------
  logic copy_to_pim, copy_to_dram;
  assign copy_to_pim  = d_ra.k == RK_COPY;
  assign copy_to_dram = p_ra.k == RK_COPY;

  always_comb begin
    pim_wvalid_o  = p_wbuf_v || copy_to_pim;
    pim_wdata_o   = copy_to_pim ? dram_rdata_i : p_wbuf;
    dram_wvalid_o = d_wbuf_v || copy_to_dram;
    dram_wdata_o  = copy_to_dram ? pim_rdata_i : d_wbuf;
  end
  assign gbuf_rank_o = (p_ra.k == RK_GBUF) || (p_wa.k == WK_GBUF);

  // ---------------- Rdata buffer toward the SoC ----------------
  logic d_to_host, p_to_host, g_to_host;
  assign d_to_host = d_ra.k == RK_HOST || d_ra.k == RK_COPY;
  assign p_to_host = p_ra.k == RK_HOST || p_ra.k == RK_COPY;
  assign g_to_host = p_ra.k == RK_GBUF_HOST;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rdata_o <= '0; host_rvalid_o <= 1'b0;
    end else begin
      host_rvalid_o <= d_to_host || p_to_host || g_to_host;
      host_rdata_o  <= d_to_host ? dram_rdata_i : (p_to_host ? pim_rdata_i : g_rd_host);
    end
  end

  // ---------------- error flag ----------------
  logic err_now;
  assign err_now = (d_to_host && (p_to_host || g_to_host)) || copy_clash || g_conflict
                || (copy_to_pim && p_wbuf_v) || (copy_to_dram && d_wbuf_v);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       err_o <= 1'b0;
    else if (err_now) err_o <= 1'b1;
  end

  // Rank read data must arrive exactly when a read is expected.
  a_dram_rd: assert property (@(posedge clk) disable iff (!rst_n)
    (d_ra.k == RK_HOST || d_ra.k == RK_COPY) |-> dram_rvalid_i);
  a_pim_rd: assert property (@(posedge clk) disable iff (!rst_n)
    (p_ra.k == RK_HOST || p_ra.k == RK_COPY || p_ra.k == RK_GBUF) |-> pim_rvalid_i);
  // SoC write data must be on the bus TCWL cycles after its WR.
  a_host_wdata: assert property (@(posedge clk) disable iff (!rst_n)
    (d_wa.k == WK_HOST || p_wa.k == WK_HOST || p_wa.k == WK_HOST_GBUF) |-> host_wvalid_i);
  a_delay: assert property (@(posedge clk) TCL > TCWL);
endmodule
