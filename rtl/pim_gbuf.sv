// pim_gbuf: the 4 KB PIM global buffer inside the near-data memory controller.
//
// WORDS x 64-bit words (512 x 8 B = 4 KB, the paper's size), addressed by the
// 9-bit buffer address the NMC assembles from {ACT-1 bank bits, RD/WR bank
// bits, tag[0]}. One access moves a whole 16-beat burst: the BL words starting
// at the address, wrapping at the end of the buffer; beat n of the burst is word
// (addr + n) mod WORDS. One write port (updates at the rising edge) and two
// combinational read ports (one toward the PIM ranks, one toward the host).
// Burst-wide access and word granularity of the address are this design's
// reading of a 9-bit address for a 4 KB buffer.
module pim_gbuf #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned BL    = 16,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [64*BL-1:0] wdata,
  input  logic [AW-1:0]    raddr0,
  output logic [64*BL-1:0] rdata0,
  input  logic [AW-1:0]    raddr1,
  output logic [64*BL-1:0] rdata1
);
  logic [63:0] mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(WORDS); i++) mem[i] <= '0;
    end else if (we) begin
      for (int n = 0; n < int'(BL); n++) mem[AW'(waddr + AW'(n))] <= wdata[n*64 +: 64];
    end
  end

  always_comb begin
    for (int n = 0; n < int'(BL); n++) begin
      rdata0[n*64 +: 64] = mem[AW'(raddr0 + AW'(n))];
      rdata1[n*64 +: 64] = mem[AW'(raddr1 + AW'(n))];
    end
  end
endmodule
