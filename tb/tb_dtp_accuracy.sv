// tb_dtp_accuracy: preload and moving-average update of the per-head,
// per-rank acceptance rates, compared with a model written here: accepted
// heads move the matching rank toward 1.0 and the others toward 0, the first
// rejected head decays, deeper heads keep their rates.
module tb_dtp_accuracy;
  import lpspec_pkg::*;
  localparam int H = 4, K = 4, S = 3;
  logic clk = 0, rst_n = 0;
  logic wr_en, upd_valid;
  logic [2:0] wr_head, acc_len;
  logic [1:0] wr_rank;
  logic [PW-1:0] wr_p;
  logic [H-1:0][1:0] acc_rank;
  logic [H-1:0][K-1:0][PW-1:0] p_o;
  int model [H][K];
  int checks = 0, failures = 0;

  dtp_accuracy #(.H(H), .K(K), .SHIFT(S)) dut (.*);
  always #5 clk = ~clk;

  task automatic compare(string what);
    for (int i = 0; i < H; i++)
      for (int k = 0; k < K; k++) begin
        checks++;
        if (int'(p_o[i][k]) != model[i][k]) begin
          failures++; $display("FAIL %s p[%0d][%0d] got %0d exp %0d", what, i, k, p_o[i][k], model[i][k]);
        end
      end
  endtask

  initial begin
    wr_en = 0; upd_valid = 0; wr_head = 0; wr_rank = 0; wr_p = 0; acc_len = 0; acc_rank = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (model[i, k]) model[i][k] = 0;
    @(negedge clk); compare("reset");
    foreach (model[i, k]) begin
      @(negedge clk);
      wr_en = 1; wr_head = 3'(i); wr_rank = 2'(k); wr_p = PW'($urandom % 32768);
      model[i][k] = int'(wr_p);
      @(negedge clk); wr_en = 0;
    end
    compare("preload");
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      upd_valid = 1; acc_len = 3'($urandom % (H + 1));
      for (int i = 0; i < H; i++) acc_rank[i] = 2'($urandom);
      for (int i = 0; i < H; i++)
        if (i <= int'(acc_len))
          for (int k = 0; k < K; k++)
            if (i < int'(acc_len) && int'(acc_rank[i]) == k)
              model[i][k] = model[i][k] + ((32768 - model[i][k]) >> S);
            else
              model[i][k] = model[i][k] - (model[i][k] >> S);
      @(negedge clk); upd_valid = 0;
      compare($sformatf("update %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
