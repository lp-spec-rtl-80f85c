// dtp_tte: token tree explorer with hardware estimator (draft token pruner).
//
// Builds the token tree for the next decoding step greedily from the root (the
// LM-head token t0, expected acceptance 1.0). A node at depth d has as
// candidate children the ranked predictions of Decode Head d+1; a child's
// expected acceptance is the product of the rates on its path,
// l = l_parent * p[d][k]. Each sampling step scans the tree (one node per
// cycle), takes the candidate with the highest l and asks the estimator
// whether adding it pays off; the first refused candidate ends the search, as
// does a full tree (max_nodes_i).
//
// Estimator (L = number of tree nodes, root included, = tokens verified):
//   T(L) = max(t_npu, t_pim_pass * ceil(L / N_ALU))
//   E(L) = e_fixed + e_token * L
// A candidate with expectation l is accepted when l > 0,
//   (Esum + l) * T(L) >= Esum * T(L+1)   (expected tokens per unit time do not drop),
//   T(L+1) <= t_slo and E(L+1) <= e_budget.
// The latency terms are the paper's NPU and PIM models; the paper writes the
// total as min(T_NPU, T_PIM), but with the NPU and PIM working in parallel a
// step lasts as long as the slower of the two, so this design takes the max.
// The linear energy model, the acceptance rule and the children-in-rank-order
// search are this design's choices.
//
// Children of a node are offered in rank order (top-1 first). Timing: start_i
// samples p_i and cfg_i; a tree of L nodes takes about L*(L+1)/2 + 2L cycles;
// done_o pulses with the result held until the next start.
//
// Lint notes: the latency function reads only the two time fields of the
// estimator configuration; the energy and SLO fields are used by the caller.
module dtp_tte
  import lpspec_pkg::*;
#(
  parameter int unsigned H         = 4,
  parameter int unsigned K         = 4,
  parameter int unsigned MAX_NODES = 32,
  parameter int unsigned NA        = N_ALU,
  localparam int unsigned NW       = $clog2(MAX_NODES + 1),
  localparam int unsigned IW       = $clog2(MAX_NODES),
  localparam int unsigned HW       = $clog2(H + 1),
  localparam int unsigned KW       = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned EW       = PW + NW     // expected-length sum width
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start_i,
  input  logic [H-1:0][K-1:0][PW-1:0]       p_i,
  input  est_cfg_t                          cfg_i,
  input  logic [NW-1:0]                     max_nodes_i,
  output logic                              busy_o,
  output logic                              done_o,
  output logic [NW-1:0]                     n_nodes_o,    // L_spec, root included
  output logic [EW-1:0]                     exp_len_o,    // Q1.15 sum
  output logic [MAX_NODES-1:0][IW-1:0]      parent_o,
  output logic [MAX_NODES-1:0][HW-1:0]      depth_o,
  output logic [MAX_NODES-1:0][KW-1:0]      rank_o
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_DECIDE} state_e;
  state_e state;

  logic [H-1:0][K-1:0][PW-1:0] p;
  est_cfg_t                    cfg;
  logic [NW-1:0]               max_n;

  logic [MAX_NODES-1:0][PW-1:0] lval;
  logic [MAX_NODES-1:0][KW:0]   nrank;   // next child rank to offer
  logic [NW-1:0]                n;
  logic [EW-1:0]                esum;
  logic [IW-1:0]                j;
  logic                         best_v;
  logic [IW-1:0]                best_j;
  logic [PW-1:0]                best_l;

  // candidate of node j
  logic          cand_v;
  logic [PW-1:0] cand_l;
  always_comb begin
    logic [2*PW-1:0] prod;
    cand_v = (depth_o[j] < HW'(H)) && (nrank[j] < (KW+1)'(K));
    prod   = 32'(lval[j]) * 32'(p[depth_o[j][HW-1:0] < HW'(H) ? depth_o[j] : '0][nrank[j][KW-1:0]]);
    cand_l = PW'(prod >> (PW - 1));
  end

  // estimator
  function automatic logic [47:0] t_of(input logic [NW:0] l, input est_cfg_t c);
    logic [47:0] tp;
    tp = 48'(c.t_pim_pass) * ((48'(l) + 48'(NA - 1)) / 48'(NA));
    return (48'(c.t_npu) > tp) ? 48'(c.t_npu) : tp;
  endfunction

  logic [47:0] t_cur, t_nxt, e_nxt;
  logic        accept;
  always_comb begin
    t_cur  = t_of({1'b0, n}, cfg);
    t_nxt  = t_of({1'b0, n} + 1'b1, cfg);
    e_nxt  = 48'(cfg.e_fixed) + 48'(cfg.e_token) * 48'({1'b0, n} + 1'b1);
    accept = best_v && (best_l != '0)
          && (80'(esum + EW'(best_l)) * 80'(t_cur) >= 80'(esum) * 80'(t_nxt))
          && (t_nxt <= 48'(cfg.t_slo)) && (e_nxt <= 48'(cfg.e_budget));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; p <= '0; cfg <= '0; max_n <= '0;
      lval <= '0; nrank <= '0; n <= '0; esum <= '0; j <= '0;
      best_v <= 1'b0; best_j <= '0; best_l <= '0;
      parent_o <= '0; depth_o <= '0; rank_o <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state)
        S_IDLE: if (start_i) begin
          p <= p_i; cfg <= cfg_i; max_n <= max_nodes_i;
          lval <= '0; nrank <= '0; parent_o <= '0; depth_o <= '0; rank_o <= '0;
          lval[0] <= PROB_ONE;
          n <= NW'(1); esum <= EW'(PROB_ONE);
          j <= '0; best_v <= 1'b0; best_l <= '0; best_j <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (cand_v && (!best_v || cand_l > best_l)) begin
            best_v <= 1'b1; best_j <= j; best_l <= cand_l;
          end
          if (NW'(j) + 1'b1 >= n) state <= S_DECIDE;
          else                   j <= j + 1'b1;
        end
        S_DECIDE: begin
          if (n < max_n && n < NW'(MAX_NODES) && accept) begin
            lval[n[IW-1:0]]     <= best_l;
            parent_o[n[IW-1:0]] <= best_j;
            depth_o[n[IW-1:0]]  <= depth_o[best_j] + 1'b1;
            rank_o[n[IW-1:0]]   <= nrank[best_j][KW-1:0];
            nrank[best_j]       <= nrank[best_j] + 1'b1;
            n    <= n + 1'b1;
            esum <= esum + EW'(best_l);
            j <= '0; best_v <= 1'b0; best_l <= '0;
            state <= S_SCAN;
          end else begin
            done_o <= 1'b1;
            state  <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o    = state != S_IDLE;
  assign n_nodes_o = n;
  assign exp_len_o = esum;
endmodule
