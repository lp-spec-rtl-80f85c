// mpu_ctrl: instruction sequencer of one matrix processing unit.
//
// The controller walks the command register file (CRF). In all-bank PIM mode
// every column command (RD or WR) sent to the die is a trigger: the instruction
// at the program counter is issued to the datapath in that cycle (exec_o) and
// the PC advances. JUMP and EXIT need no trigger: a JUMP is resolved in the
// first idle cycle it is seen (a single loop counter, no nesting), and EXIT
// stops the program and raises done_o. A trigger that arrives while the PC sits
// on an unresolved JUMP, or after EXIT, is dropped and reported on miss_o.
// start_i (entering PIM mode) clears the PC and the loop state.
//
// With address-aligned mode (instr.aam) the operand index comes from the
// column address of the triggering command, so one looped MAC can walk an
// operand table while the host walks the columns. The paper says only that the
// controller fetches instructions from the CRF and schedules the MPU; the
// sequencing rules above are modelled on commodity PIM controllers.
//
// Lint notes: col_i[5:4] and the destination/flag fields of the instruction
// are not needed by the sequencer (the datapath decodes them) and stay unused.
module mpu_ctrl
  import lpspec_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  logic             trigger_i,
  input  logic [COL_W-1:0] col_i,
  input  instr_t           instr_i,    // CRF[pc_o]
  output logic [4:0]       pc_o,
  output logic             exec_o,     // issue instr_i this cycle
  output logic [3:0]       src_idx_o,  // resolved operand index
  output logic             done_o,
  output logic             miss_o
);
  logic [4:0] pc;
  logic       done;
  logic       loop_active;
  logic [7:0] loop_cnt;
  logic       is_ctl;

  assign is_ctl    = (instr_i.op == OP_JUMP) || (instr_i.op == OP_EXIT);
  assign exec_o    = trigger_i && !done && !is_ctl && !start_i;
  assign miss_o    = trigger_i && (done || is_ctl) && !start_i;
  assign src_idx_o = instr_i.aam ? col_i[3:0] : instr_i.src;
  assign pc_o      = pc;
  assign done_o    = done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; done <= 1'b1; loop_active <= 1'b0; loop_cnt <= '0;
    end else if (start_i) begin
      pc <= '0; done <= 1'b0; loop_active <= 1'b0; loop_cnt <= '0;
    end else if (!done) begin
      if (instr_i.op == OP_EXIT) begin
        done <= 1'b1;
      end else if (instr_i.op == OP_JUMP) begin
        if (!loop_active) begin
          if (instr_i.imm[12:5] == 8'd0) pc <= pc + 5'd1;
          else begin
            loop_active <= 1'b1;
            loop_cnt    <= instr_i.imm[12:5] - 8'd1;
            pc          <= instr_i.imm[4:0];
          end
        end else if (loop_cnt == 8'd0) begin
          loop_active <= 1'b0;
          pc          <= pc + 5'd1;
        end else begin
          loop_cnt <= loop_cnt - 8'd1;
          pc       <= instr_i.imm[4:0];
        end
      end else if (trigger_i) begin
        pc <= pc + 5'd1;
      end
    end
  end
endmodule
