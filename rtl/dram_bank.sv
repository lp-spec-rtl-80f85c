// dram_bank: behavioural model of one DRAM bank cell array (not synthesizable
// as a DRAM; a real bank is a process-specific macro).
//
// The array holds 2^ROW_W rows of 2^COL_W column bursts of 256 bits (a 2 KB
// page of a x16 LPDDR5 die, 1 GB per 16-bank die as in the paper's Table II).
// Storage is sparse (an associative array), so the full capacity costs only
// what is written; a location never written reads as zero. The read port is
// combinational; the write port updates at the rising edge. The two ports have
// separate addresses because the die's column reads and its delayed write data
// (tCWL after the WR command) may fall in the same cycle. Row activation,
// precharge and DRAM timing are handled by the die model.
//
// The write is a blocking assignment in a clocked process because an
// associative array may not take a nonblocking one; readers sample rdata at
// the same edge, so a read and a write of the same word in one cycle must be
// avoided (the die never issues them together).
module dram_bank #(
  parameter int unsigned ROW_W = 15,
  parameter int unsigned COL_W = 6,
  parameter int unsigned DW    = 256
) (
  input  logic             clk,
  input  logic             we,
  input  logic [ROW_W-1:0] wrow,
  input  logic [COL_W-1:0] wcol,
  input  logic [DW-1:0]    wdata,
  input  logic [ROW_W-1:0] rrow,
  input  logic [COL_W-1:0] rcol,
  output logic [DW-1:0]    rdata
);
  logic [DW-1:0] mem [logic [ROW_W+COL_W-1:0]];

  always @(posedge clk) begin
    if (we) mem[{wrow, wcol}] = wdata;
  end

  always_comb begin
    if (mem.exists({rrow, rcol})) rdata = mem[{rrow, rcol}];
    else                          rdata = '0;
  end
endmodule
