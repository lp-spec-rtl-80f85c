// dtp_accuracy: token tree accuracy model of the draft token pruner.
//
// Holds p[i][k], the running acceptance rate of the k-th ranked prediction of
// Decode Head i+1 (H heads, top-K ranks), as unsigned Q1.15. After every
// decoding step the verifier reports how many heads were accepted along the
// accepted path (acc_len) and, for each accepted head, which rank matched
// (acc_rank). Each verified head moves its K rates one step toward the outcome
// with an exponential moving average:
//     p <- p + (target - p) / 2^SHIFT,  target = 1.0 for the matching rank, else 0.
// Heads 1..acc_len were accepted; head acc_len+1 was verified and rejected (all
// targets 0); deeper heads were not verified and keep their rates. The host may
// preload rates (wr_*) from offline profiling. Updates land at the rising edge
// after upd_valid. The paper says only that rates are tracked from previous
// verification results; the moving average, SHIFT and the preload port are
// this design's choices.
module dtp_accuracy
  import lpspec_pkg::*;
#(
  parameter int unsigned H     = 4,
  parameter int unsigned K     = 4,
  parameter int unsigned SHIFT = 3,
  localparam int unsigned HW   = $clog2(H + 1),
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           wr_en,
  input  logic [HW-1:0]                  wr_head,   // 0 = Decode Head 1
  input  logic [KW-1:0]                  wr_rank,   // 0 = top-1
  input  logic [PW-1:0]                  wr_p,
  input  logic                           upd_valid,
  input  logic [HW-1:0]                  acc_len,
  input  logic [H-1:0][KW-1:0]           acc_rank,
  output logic [H-1:0][K-1:0][PW-1:0]    p_o
);
  logic [H-1:0][K-1:0][PW-1:0] p;
  assign p_o = p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= '0;
    end else if (upd_valid) begin
      for (int i = 0; i < int'(H); i++) begin
        if (HW'(i) <= acc_len) begin
          for (int k = 0; k < int'(K); k++) begin
            if (HW'(i) < acc_len && acc_rank[i] == KW'(k))
              p[i][k] <= p[i][k] + ((PROB_ONE - p[i][k]) >> SHIFT);
            else
              p[i][k] <= p[i][k] - (p[i][k] >> SHIFT);
          end
        end
      end
    end else if (wr_en) begin
      p[wr_head][wr_rank] <= wr_p;
    end
  end
endmodule
