// dau: data allocation unit of the LP-Spec scheduler.
//
// Keeps the weights of the model split between the DRAM ranks (read by the
// NPU) and the PIM ranks (computed in memory) so that both finish a decoding
// step together. The split is kept as a boundary over TOTAL_BLOCKS weight
// blocks: blocks [0, boundary) live in DRAM, [boundary, TOTAL_BLOCKS) in PIM.
//
// Model partition table: the speculation length L_spec of the coming step
// (ntok) maps to a Group ID, ceil(ntok / GROUP_SIZE) - 1, saturated at the last
// group. Each group holds an allocation ratio PIM : DRAM (reset values 5:1 for
// group 0 and 4:1 for group 1 as in the paper's example table; the rest are
// assumed and may be rewritten through tbl_*) and a 2-bit saturating counter.
// When a step falls into a group other than the active one, that group's
// counter counts up and the counters of all other inactive groups clear; the
// active group's counter is left as it is. Reaching 2 ("10") a second time in
// a row activates the DAU: the group becomes active, the new boundary is
//     boundary = TOTAL_BLOCKS * dram / (pim + dram)
// and the blocks between the old and new boundary are issued one per
// handshake on the migration stream (mig_*), together with their direction.
// The NPU turns each into copy-write reads through the NMC. An activation that
// would come while a migration is still streaming waits for the next step
// (the counter stays saturated). The block granularity, the boundary form of
// the ratio and the stream interface are this design's choices.
module dau #(
  parameter int unsigned N_GROUPS     = 8,
  parameter int unsigned GROUP_SIZE   = 4,
  parameter int unsigned TOTAL_BLOCKS = 4096,
  parameter int unsigned TW           = 6,
  localparam int unsigned GW          = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1,
  localparam int unsigned BW          = $clog2(TOTAL_BLOCKS + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // model partition table write port
  input  logic                         tbl_we,
  input  logic [GW-1:0]                tbl_idx,
  input  logic [3:0]                   tbl_pim,
  input  logic [3:0]                   tbl_dram,
  // speculation length of the next step
  input  logic                         ntok_valid,
  input  logic [TW-1:0]                ntok,
  // state
  output logic [GW-1:0]                group_o,
  output logic [BW-1:0]                boundary_o,
  output logic [N_GROUPS-1:0][1:0]     cnt_o,
  output logic                         activate_o,
  output logic                         busy_o,
  // migration stream
  output logic                         mig_valid,
  input  logic                         mig_ready,
  output logic [BW-1:0]                mig_block,
  output logic                         mig_to_pim   // 1: DRAM -> PIM, 0: PIM -> DRAM
);
  logic [N_GROUPS-1:0][3:0] r_pim, r_dram;
  logic [N_GROUPS-1:0][1:0] cnt;
  logic [GW-1:0]            cur;
  logic [BW-1:0]            boundary;
  logic [BW-1:0]            mig_next, mig_end;
  logic                     mig_dir;
  logic                     busy;

  function automatic logic [3:0] def_pim(input int g);
    // group 0: 5:1, group 1: 4:1 (paper); then 3:1, 3:1, 2:1, 2:1, 1:1, ... (assumed)
    case (g)
      0: return 4'd5;
      1: return 4'd4;
      2, 3: return 4'd3;
      4, 5: return 4'd2;
      default: return 4'd1;
    endcase
  endfunction

  function automatic logic [BW-1:0] bnd(input logic [3:0] pim, input logic [3:0] dram);
    logic [BW+4:0] num;
    num = (BW+5)'(TOTAL_BLOCKS) * (BW+5)'(dram);
    return BW'(num / (BW+5)'(5'(pim) + 5'(dram)));
  endfunction

  // Group ID of the incoming speculation length
  logic [GW-1:0] g_in;
  always_comb begin
    logic [TW:0] q;
    q = ((TW+1)'(ntok) + (TW+1)'(GROUP_SIZE - 1)) / (TW+1)'(GROUP_SIZE);
    if (q == '0)                         g_in = '0;
    else if (q > (TW+1)'(N_GROUPS))      g_in = GW'(N_GROUPS - 1);
    else                                 g_in = GW'(q - 1'b1);
  end

  logic [1:0] cnt_inc;
  logic       act;
  assign cnt_inc = (cnt[g_in] == 2'd3) ? 2'd3 : cnt[g_in] + 2'd1;
  assign act     = ntok_valid && (g_in != cur) && (cnt_inc >= 2'd2) && !busy;

  logic [BW-1:0] new_b;
  assign new_b = bnd(r_pim[g_in], r_dram[g_in]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < int'(N_GROUPS); g++) begin
        r_pim[g]  <= def_pim(g);
        r_dram[g] <= 4'd1;
      end
      cnt      <= '0;
      cur      <= '0;
      boundary <= bnd(def_pim(0), 4'd1);
      busy     <= 1'b0;
      mig_next <= '0; mig_end <= '0; mig_dir <= 1'b0;
    end else begin
      if (tbl_we) begin
        r_pim[tbl_idx]  <= tbl_pim;
        r_dram[tbl_idx] <= tbl_dram;
      end
      if (ntok_valid) begin
        for (int g = 0; g < int'(N_GROUPS); g++) begin
          if (GW'(g) == g_in && g_in != cur) cnt[g] <= cnt_inc;
          else if (GW'(g) != cur)            cnt[g] <= 2'd0;
        end
      end
      if (act) begin
        cur      <= g_in;
        boundary <= new_b;
        if (new_b > boundary) begin   // DRAM grows: PIM -> DRAM
          mig_next <= boundary; mig_end <= new_b; mig_dir <= 1'b0; busy <= 1'b1;
        end else if (new_b < boundary) begin
          mig_next <= new_b; mig_end <= boundary; mig_dir <= 1'b1; busy <= 1'b1;
        end
      end else if (busy && mig_ready) begin
        mig_next <= mig_next + 1'b1;
        if (mig_next + 1'b1 == mig_end) busy <= 1'b0;
      end
    end
  end

  assign group_o     = cur;
  assign boundary_o  = boundary;
  assign cnt_o       = cnt;
  assign activate_o  = act;
  assign busy_o      = busy;
  assign mig_valid   = busy;
  assign mig_block   = mig_next;
  assign mig_to_pim  = mig_dir;
endmodule
