// tb_pim_gbuf: burst writes and reads of the 4 KB buffer against a word
// model, including bursts that wrap past the last word.
module tb_pim_gbuf;
  logic clk = 0, rst_n = 0;
  logic we;
  logic [8:0] waddr, raddr0, raddr1;
  logic [1023:0] wdata, rdata0, rdata1;
  logic [63:0] model [512];
  int checks = 0, failures = 0;

  pim_gbuf dut (.*);
  always #5 clk = ~clk;

  task automatic chk_rd(logic [8:0] a0, logic [8:0] a1);
    raddr0 = a0; raddr1 = a1; #1;
    for (int n = 0; n < 16; n++) begin
      checks += 2;
      if (rdata0[n*64 +: 64] !== model[9'(a0 + 9'(n))]) begin failures++; $display("FAIL p0 a=%0d n=%0d", a0, n); end
      if (rdata1[n*64 +: 64] !== model[9'(a1 + 9'(n))]) begin failures++; $display("FAIL p1 a=%0d n=%0d", a1, n); end
    end
  endtask

  initial begin
    we = 0; waddr = 0; raddr0 = 0; raddr1 = 0; wdata = 0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk_rd(9'd0, 9'd500);
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      we = 1; waddr = (t == 0) ? 9'd505 : 9'($urandom);
      for (int i = 0; i < 32; i++) wdata[i*32 +: 32] = $urandom;
      @(posedge clk); #1;
      for (int n = 0; n < 16; n++) model[9'(waddr + 9'(n))] = wdata[n*64 +: 64];
      we = 0;
      chk_rd(waddr, 9'($urandom));
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
