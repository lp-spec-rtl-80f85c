// tb_nmc: the near-data memory controller between a SoC driver and two
// behavioural rank groups (1 DRAM rank, 3 PIM ranks).
//  - tag 00 writes and reads on both sides, SoC read latency TCL + 2;
//  - tag 01 copy-write DRAM -> PIM and PIM -> DRAM: the SoC still gets the
//    data, the target rank receives it, and the NMC's WR reaches the target
//    bus exactly TCL - TCWL cycles after the RD reached the source bus;
//  - tag 1x PIM buffer: SoC fills the buffer (no PIM CS), buffer -> PIM rank,
//    PIM rank -> buffer (no data to the SoC), SoC reads the buffer; the buffer
//    address is {ACT-1 bank, RD/WR bank, tag[0]};
//  - a DRAM read running alongside a buffer -> PIM write raises no error;
//  - two reads returning in the same cycle set the sticky error flag.
module tb_nmc;
  import lpspec_pkg::*;
  localparam int TCL = 12, TCWL = 6, B = 1024;
  logic clk = 0, rst_n = 0;
  logic [1:0] tag_i;
  ca_t dram_ca_i, pim_ca_i, dram_ca_o, pim_ca_o;
  logic [0:0] dram_cs_i, dram_cs_o;
  logic [2:0] pim_cs_i, pim_cs_o;
  logic [B-1:0] host_wdata_i, host_rdata_o, dram_wdata_o, pim_wdata_o, dram_rdata_i, pim_rdata_i;
  logic host_wvalid_i, host_rvalid_o, dram_wvalid_o, pim_wvalid_o, dram_rvalid_i, pim_rvalid_i;
  logic copy_wr_o, gbuf_rank_o, err_o;
  int dwrites, pwrites;
  int checks = 0, failures = 0, cyc = 0;
  int n_copy = 0, n_gbuf = 0, n_hostrd = 0;
  int t_src_rd = -1, t_dst_wr = -1;

  nmc #(.N_PIM(3), .N_DRAM(1), .BURST(B), .TCL(TCL), .TCWL(TCWL)) dut (.*);
  tb_mem_model #(.NR(1), .BURST(B), .TCL(TCL), .TCWL(TCWL)) u_dram (
    .clk, .ca_i(dram_ca_o), .cs_i(dram_cs_o), .wdata_i(dram_wdata_o), .wvalid_i(dram_wvalid_o),
    .rdata_o(dram_rdata_i), .rvalid_o(dram_rvalid_i), .writes_o(dwrites));
  tb_mem_model #(.NR(3), .BURST(B), .TCL(TCL), .TCWL(TCWL)) u_pim (
    .clk, .ca_i(pim_ca_o), .cs_i(pim_cs_o), .wdata_i(pim_wdata_o), .wvalid_i(pim_wvalid_o),
    .rdata_o(pim_rdata_i), .rvalid_o(pim_rvalid_i), .writes_o(pwrites));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (copy_wr_o) n_copy++;
      if (gbuf_rank_o) n_gbuf++;
      if (host_rvalid_o) n_hostrd++;
      if ((|dram_cs_o) && dram_ca_o.cmd == CMD_RD) t_src_rd = cyc;
      if ((|pim_cs_o) && pim_ca_o.cmd == CMD_WR) t_dst_wr = cyc;
    end
  end

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [B-1:0] rnd();
    logic [B-1:0] v;
    for (int i = 0; i < B/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic clear();
    tag_i = 0; dram_ca_i = '{cmd: CMD_NOP, default: '0}; pim_ca_i = '{cmd: CMD_NOP, default: '0};
    dram_cs_i = 0; pim_cs_i = 0;
  endtask

  task automatic issue(logic pim, logic [1:0] tag, cmd_e c, int cs, int ba, int col);
    @(negedge clk);
    tag_i = tag;
    if (pim) begin pim_ca_i = '{cmd: c, ba: 4'(ba), row: '0, col: 6'(col)}; pim_cs_i = 3'(cs); end
    else     begin dram_ca_i = '{cmd: c, ba: 4'(ba), row: '0, col: 6'(col)}; dram_cs_i = 1'(cs); end
    @(negedge clk); clear();
  endtask

  // WR plus SoC data TCWL after it
  task automatic write(logic pim, logic [1:0] tag, int cs, int ba, int col, logic [B-1:0] d);
    issue(pim, tag, CMD_WR, cs, ba, col);      // now just after the command edge
    repeat (TCWL - 1) @(negedge clk);
    host_wdata_i = d; host_wvalid_i = 1;
    @(negedge clk); host_wvalid_i = 0;
    repeat (4) @(negedge clk);
  endtask

  // RD; wait for SoC data; returns latency (edges from command to data sample)
  task automatic read(logic pim, logic [1:0] tag, int cs, int ba, int col,
                      output logic [B-1:0] d, output int lat, output logic got);
    int c0;
    @(negedge clk);
    tag_i = tag;
    if (pim) begin pim_ca_i = '{cmd: CMD_RD, ba: 4'(ba), row: '0, col: 6'(col)}; pim_cs_i = 3'(cs); end
    else     begin dram_ca_i = '{cmd: CMD_RD, ba: 4'(ba), row: '0, col: 6'(col)}; dram_cs_i = 1'(cs); end
    c0 = cyc;
    @(negedge clk); clear();
    got = 0; lat = 0;
    repeat (TCL + 6) begin
      @(negedge clk);
      if (host_rvalid_o && !got) begin got = 1; d = host_rdata_o; lat = cyc - c0; end
    end
  endtask

  logic [B-1:0] a, b, c, e, r;
  int lat;
  logic got;

  initial begin
    clear(); host_wdata_i = 0; host_wvalid_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    a = rnd(); b = rnd(); c = rnd(); e = rnd();
    // ---- normal access ----
    write(0, 2'b00, 1, 2, 3, a);
    read(0, 2'b00, 1, 2, 3, r, lat, got);
    chk("DRAM normal readback", got && r == a);
    chk($sformatf("SoC read latency %0d == TCL+2", lat), lat == TCL + 2);
    write(1, 2'b00, 3'b010, 4, 9, b);
    read(1, 2'b00, 3'b010, 4, 9, r, lat, got);
    chk("PIM normal readback", got && r == b);
    // ---- copy-write DRAM -> PIM rank 2 ----
    @(negedge clk);
    tag_i = 2'b01; dram_ca_i = '{cmd: CMD_RD, ba: 4'd2, row: '0, col: 6'd3}; dram_cs_i = 1; pim_cs_i = 3'b100;
    @(negedge clk); clear();
    repeat (TCL + 6) @(negedge clk);
    chk("copy WR issued", n_copy == 1);
    chk($sformatf("copy WR spacing %0d == TCL-TCWL", t_dst_wr - t_src_rd), t_dst_wr - t_src_rd == TCL - TCWL);
    chk("SoC got the copy read", n_hostrd == 3);
    chk("PIM rank 2 holds the copied burst", u_pim.peek(2, 2, 3) == a);
    // ---- copy-write PIM rank 1 -> DRAM ----
    n_hostrd = 0;
    @(negedge clk);
    tag_i = 2'b01; pim_ca_i = '{cmd: CMD_RD, ba: 4'd4, row: '0, col: 6'd9}; pim_cs_i = 3'b010; dram_cs_i = 1;
    @(negedge clk); clear();
    repeat (TCL + 6) @(negedge clk);
    chk("SoC data on PIM->DRAM copy", n_hostrd == 1);
    chk("DRAM holds the copied burst", u_dram.peek(0, 4, 9) == b);
    chk("second copy WR", n_copy == 2);
    // ---- PIM buffer ----
    issue(1, 2'b10, CMD_ACT, 0, 4'hA, 0);                  // ACT-1 bank bits = A
    write(1, 2'b11, 0, 5, 0, c);                           // SoC -> buffer @ {A,5,1}
    chk("buffer word written", dut.u_gbuf.mem[9'h14B] == c[63:0]);
    issue(1, 2'b10, CMD_ACT, 1, 4'hA, 0);
    issue(1, 2'b11, CMD_WR, 3'b001, 5, 7);                 // buffer -> PIM rank 0, bank 5 col 7
    // DRAM read running at the same time
    read(0, 2'b00, 1, 2, 3, r, lat, got);
    chk("concurrent DRAM read", got && r == a);
    chk("PIM rank 0 got the buffer burst", u_pim.peek(0, 5, 7) == c);
    write(1, 2'b00, 3'b001, 6, 1, e);
    n_hostrd = 0;
    issue(1, 2'b10, CMD_RD, 3'b001, 6, 1);                 // PIM rank 0 -> buffer @ {A,6,0}
    repeat (TCL + 6) @(negedge clk);
    chk("rank->buffer read not sent to SoC", n_hostrd == 0);
    read(1, 2'b10, 0, 6, 0, r, lat, got);                  // SoC reads buffer @ {A,6,0}
    chk("SoC reads the buffer", got && r == e);
    chk("buffer<->rank transfers counted", n_gbuf == 2);
    chk("no error so far", !err_o);
    // ---- collision ----
    @(negedge clk);
    dram_ca_i = '{cmd: CMD_RD, ba: 4'd2, row: '0, col: 6'd3}; dram_cs_i = 1;
    pim_ca_i  = '{cmd: CMD_RD, ba: 4'd4, row: '0, col: 6'd9}; pim_cs_i = 3'b010;
    @(negedge clk); clear();
    repeat (TCL + 6) @(negedge clk);
    chk("collision flagged", err_o);
    $display("copies=%0d buffer transfers=%0d", n_copy, n_gbuf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
