// tb_mem_model: behavioural stand-in for a group of ranks on one C/A bus, used
// by the controller testbench. Storage is keyed by {rank, bank, column} (rows
// are ignored); RD data returns TCL cycles after the command, WR data is taken
// TCWL cycles after it. Only one chip select may be raised per command.
module tb_mem_model
  import lpspec_pkg::*;
#(
  parameter int unsigned NR    = 1,
  parameter int unsigned BURST = 1024,
  parameter int unsigned TCL   = 12,
  parameter int unsigned TCWL  = 6
) (
  input  logic             clk,
  input  ca_t              ca_i,
  input  logic [NR-1:0]    cs_i,
  input  logic [BURST-1:0] wdata_i,
  input  logic             wvalid_i,
  output logic [BURST-1:0] rdata_o,
  output logic             rvalid_o,
  output int               writes_o
);
  logic [BURST-1:0] mem [int];
  int wq_key [TCWL+1];
  int rq_key [TCL+1];
  int cyc = 0;

  initial begin
    rdata_o = '0; rvalid_o = 1'b0; writes_o = 0;
    foreach (wq_key[i]) wq_key[i] = -1;
    foreach (rq_key[i]) rq_key[i] = -1;
  end

  function automatic int key(int r, int ba, int col);
    return (r << 16) | (ba << 8) | col;
  endfunction

  function automatic logic [BURST-1:0] peek(int r, int ba, int col);
    return mem.exists(key(r, ba, col)) ? mem[key(r, ba, col)] : '0;
  endfunction

  always @(posedge clk) begin
    int r;
    r = -1;
    for (int i = 0; i < int'(NR); i++) if (cs_i[i]) r = i;
    // write data of a WR issued TCWL cycles ago
    if (wq_key[TCWL-1] >= 0) begin
      if (wvalid_i) begin mem[wq_key[TCWL-1]] = wdata_i; writes_o++; end
      else $display("MODEL: missing write data");
    end
    for (int i = TCWL - 1; i > 0; i--) wq_key[i] = wq_key[i-1];
    wq_key[0] = (r >= 0 && ca_i.cmd == CMD_WR) ? key(r, int'(ca_i.ba), int'(ca_i.col)) : -1;
    // read pipeline
    for (int i = TCL - 1; i > 0; i--) rq_key[i] = rq_key[i-1];
    rq_key[0] = (r >= 0 && ca_i.cmd == CMD_RD) ? key(r, int'(ca_i.ba), int'(ca_i.col)) : -1;
    rvalid_o <= rq_key[TCL-1] >= 0;
    rdata_o  <= (rq_key[TCL-1] >= 0 && mem.exists(rq_key[TCL-1])) ? mem[rq_key[TCL-1]] : '0;
  end
endmodule
