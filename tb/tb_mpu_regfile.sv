// tb_mpu_regfile: random masked writes and dual-port reads against a model,
// plus the reset-to-zero rule.
module tb_mpu_regfile;
  localparam int DEPTH = 16, WIDTH = 1024;
  logic clk = 0, rst_n = 0;
  logic we;
  logic [3:0] waddr, raddr0, raddr1;
  logic [WIDTH-1:0] wdata, wmask, rdata0, rdata1;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  mpu_regfile #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    we = 0; waddr = 0; raddr0 = 0; raddr1 = 0; wdata = 0; wmask = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    for (int i = 0; i < DEPTH; i++) begin
      raddr0 = 4'(i); #1; checks++;
      if (rdata0 !== '0) begin failures++; $display("FAIL reset entry %0d", i); end
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = ($urandom % 4) != 0;
      waddr = 4'($urandom);
      wdata = rnd();
      case ($urandom % 3)
        0: wmask = '1;
        1: wmask = WIDTH'({256{1'b1}}) << (256 * ($urandom % 4));
        default: wmask = rnd();
      endcase
      @(posedge clk); #1;
      if (we) model[waddr] = (model[waddr] & ~wmask) | (wdata & wmask);
      we = 0;
      raddr0 = 4'($urandom); raddr1 = 4'($urandom); #1;
      checks += 2;
      if (rdata0 !== model[raddr0]) begin failures++; $display("FAIL port0 addr %0d", raddr0); end
      if (rdata1 !== model[raddr1]) begin failures++; $display("FAIL port1 addr %0d", raddr1); end
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
