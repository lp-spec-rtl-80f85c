// mpu_regfile: generic register file used for the CRF, GRF, SRF and ARF of an MPU.
//
// DEPTH words of WIDTH bits, one write port with a bit mask (so that a host
// write can fill one 256-bit slice of a wide entry) and two asynchronous read
// ports (datapath and host window). Writes take effect at the rising clock
// edge; reset clears every word. The paper gives the sizes
// (32x32-bit CRF, 16 x 4x256-bit GRF, 16 x 4x8-bit SRF, 8 x 4x1024-bit ARF);
// the port structure is this design's choice.
module mpu_regfile #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIDTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask,
  input  logic [AW-1:0]    raddr0,
  output logic [WIDTH-1:0] rdata0,
  input  logic [AW-1:0]    raddr1,
  output logic [WIDTH-1:0] rdata1
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
    end
  end

  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];
endmodule
