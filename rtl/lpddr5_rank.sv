// lpddr5_rank: one rank of the hybrid LPDDR5-PIM module, DIES x16 dies in lockstep.
//
// As in the paper, all dies of a rank see the same command/address and chip
// select, and each drives its own 16 DQ lines of the 64-bit bus: die d owns
// DQ[16d+15:16d] (die 0 DQ[15:0] ... die 3 DQ[63:48]). A column burst is 16
// beats, carried here as one 1024-bit word whose beat n occupies bits
// [64n+63:64n]; the rank re-slices it into the 256-bit burst of each die.
// HAS_PIM selects a PIM rank (dies with MPUs) or a plain DRAM rank.
// Latencies are those of the dies: read data TCL cycles after RD, write data
// expected TCWL cycles after WR.
//
// Lint notes: the dies run in lockstep, so only die 0's pim_exec is brought out
// (the other dies' bits are unused), and each die's mode output is left
// unobserved at this level (the dies hold identical modes).
module lpddr5_rank
  import lpspec_pkg::*;
#(
  parameter bit          HAS_PIM = 1'b1,
  parameter int unsigned DIES    = 4,
  parameter int unsigned BL      = 16,
  parameter int unsigned TCL     = 12,
  parameter int unsigned TCWL    = 6,
  localparam int unsigned BURST  = DIES * 16 * BL
) (
  input  logic             clk,
  input  logic             rst_n,
  input  ca_t              ca_i,
  input  logic             cs_i,
  input  logic [BURST-1:0] wdata_i,
  input  logic             wvalid_i,
  output logic [BURST-1:0] rdata_o,
  output logic             rvalid_o,
  output logic             timing_err_o,
  output logic             pim_exec_o,
  output logic             pim_done_o
);
  logic [DIES-1:0] rv, terr, pexec, pdone;

  for (genvar d = 0; d < DIES; d++) begin : g_die
    logic [COL_BITS-1:0] wd, rd;
    mode_e               mode;
    for (genvar n = 0; n < BL; n++) begin : g_beat
      assign wd[n*16 +: 16]                 = wdata_i[n*DIES*16 + d*16 +: 16];
      assign rdata_o[n*DIES*16 + d*16 +: 16] = rd[n*16 +: 16];
    end
    pim_die #(.HAS_PIM(HAS_PIM), .TCL(TCL), .TCWL(TCWL)) u_die (
      .clk, .rst_n, .ca_i, .cs_i, .wdata_i(wd), .wvalid_i,
      .rdata_o(rd), .rvalid_o(rv[d]), .mode_o(mode), .timing_err_o(terr[d]),
      .pim_exec_o(pexec[d]), .pim_done_o(pdone[d]));
  end

  assign rvalid_o     = rv[0];
  assign timing_err_o = |terr;
  assign pim_exec_o   = pexec[0];
  assign pim_done_o   = &pdone;

  // Lockstep: every die answers in the same cycle.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) rv == '0 || rv == '1);
endmodule
