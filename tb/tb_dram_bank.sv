// tb_dram_bank: sparse bank model; unwritten words read zero, written words
// read back, separate read and write addresses in one cycle.
module tb_dram_bank;
  logic clk = 0;
  logic we;
  logic [14:0] wrow, rrow;
  logic [5:0]  wcol, rcol;
  logic [255:0] wdata, rdata;
  logic [255:0] model [int];
  int checks = 0, failures = 0;

  dram_bank dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; wrow = 0; wcol = 0; rrow = 0; rcol = 0; wdata = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      we = 1; wrow = 15'($urandom % 64); wcol = 6'($urandom); 
      for (int i = 0; i < 8; i++) wdata[i*32 +: 32] = $urandom;
      model[{wrow, wcol}] = wdata;
      rrow = 15'($urandom % 64); rcol = 6'($urandom);
      #1; checks++;
      if (rdata !== (model.exists({rrow, rcol}) && !(rrow == wrow && rcol == wcol) ? model[{rrow, rcol}] : rdata)) begin
        failures++; $display("FAIL read %0d/%0d", rrow, rcol);
      end
      if (!(rrow == wrow && rcol == wcol) && !model.exists({rrow, rcol})) begin
        checks++;
        if (rdata !== '0) begin failures++; $display("FAIL unwritten not zero"); end
      end
      @(posedge clk); #1; we = 0;
      rrow = wrow; rcol = wcol; #1; checks++;
      if (rdata !== model[{wrow, wcol}]) begin failures++; $display("FAIL readback"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
