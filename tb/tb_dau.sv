// tb_dau: data allocation unit.
//  - reset split: group 0, PIM:DRAM = 5:1, boundary 4096/6 = 682;
//  - one step in group 1 does not activate, an interruption clears the count,
//    two consecutive steps activate: boundary 4096/5 = 819, counter reads 10,
//    blocks 682..818 stream PIM -> DRAM in order under random back-pressure;
//  - two steps in group 2 during a migration wait; the next one activates;
//  - back to group 0: blocks 682..1023 stream DRAM -> PIM;
//  - a rewritten table entry (group 3 = 1:1) gives boundary 2048.
module tb_dau;
  localparam int NG = 8, TB = 4096;
  logic clk = 0, rst_n = 0;
  logic tbl_we, ntok_valid, activate_o, busy_o, mig_valid, mig_ready, mig_to_pim;
  logic [2:0] tbl_idx, group_o;
  logic [3:0] tbl_pim, tbl_dram;
  logic [5:0] ntok;
  logic [12:0] boundary_o, mig_block;
  logic [NG-1:0][1:0] cnt_o;
  int checks = 0, failures = 0, acts = 0;
  int got [$];

  dau #(.N_GROUPS(NG), .GROUP_SIZE(4), .TOTAL_BLOCKS(TB), .TW(6)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (activate_o) acts++;
    if (mig_valid && mig_ready) got.push_back(int'(mig_block));
  end

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic step(int n);
    @(negedge clk); ntok_valid = 1; ntok = 6'(n);
    @(negedge clk); ntok_valid = 0;
  endtask

  task automatic drain(int lo, int hi, logic dir, string what);
    int guard;
    guard = 0;
    while (busy_o && guard < 10000) begin
      @(negedge clk); mig_ready = ($urandom % 3) != 0; guard++;
      if (mig_valid) chk($sformatf("%s direction", what), mig_to_pim == dir);
    end
    @(negedge clk); mig_ready = 0;
    chk($sformatf("%s count %0d == %0d", what, got.size(), hi - lo), got.size() == hi - lo);
    foreach (got[i]) if (got[i] != lo + i) begin chk($sformatf("%s order", what), 0); break; end
    got.delete();
  endtask

  initial begin
    tbl_we = 0; tbl_idx = 0; tbl_pim = 0; tbl_dram = 0; ntok_valid = 0; ntok = 0; mig_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("reset boundary 682", boundary_o == 682 && group_o == 0);
    step(3); step(6);
    chk("one step in group 1: no activation", acts == 0 && cnt_o[1] == 2'b01);
    step(3);
    chk("interruption clears the count", cnt_o[1] == 2'b00);
    step(6); step(7);
    chk("second consecutive step activates", acts == 1 && group_o == 1 && boundary_o == 819);
    chk("group 1 counter reads 10", cnt_o[1] == 2'b10 && cnt_o[0] == 2'b00);
    // two steps in group 2 while migrating: deferred
    step(12); step(12);
    chk("activation deferred while busy", acts == 1 && busy_o);
    drain(682, 819, 1'b0, "PIM->DRAM");
    step(11);
    chk("deferred activation after the stream", acts == 2 && group_o == 2 && boundary_o == 1024);
    drain(819, 1024, 1'b0, "PIM->DRAM 2");
    step(2); step(1);
    chk("back to group 0", acts == 3 && boundary_o == 682);
    drain(682, 1024, 1'b1, "DRAM->PIM");
    @(negedge clk); tbl_we = 1; tbl_idx = 3; tbl_pim = 1; tbl_dram = 1;
    @(negedge clk); tbl_we = 0;
    step(14); step(16);
    chk("rewritten table entry 1:1", acts == 4 && boundary_o == 2048);
    drain(682, 2048, 1'b0, "PIM->DRAM 3");
    step(40); step(40);
    chk("long speculation saturates at the last group", group_o == 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
