// simd_alu32: one 32-wide INT8 SIMD ALU of a matrix processing unit.
//
// Each of the 32 lanes holds an INT8 multiplier and an adder, as the paper gives
// for the LP-Spec MPU. Results and accumulators are INT32, the precision the
// accumulation register file (ARF) extends to. The three operations are
//   ALU_ADD: acc_o = a + b           (element-wise, sign-extended)
//   ALU_MUL: acc_o = a * b
//   ALU_MAC: acc_o = acc_i + a * b
// Purely combinational; the MPU registers the result into its ARF. The exact
// operation set (ADD/MUL/MAC) is this design's reading of the "ADD, MUL, ..."
// units drawn in the paper's MPU figure.
module simd_alu32
  import lpspec_pkg::*;
#(
  parameter int unsigned W_LANES = LANES
) (
  input  alu_op_e                 op,
  input  logic [W_LANES*8-1:0]    a,      // INT8 lanes (bank operand)
  input  logic [W_LANES*8-1:0]    b,      // INT8 lanes (register operand)
  input  logic [W_LANES*32-1:0]   acc_i,  // INT32 lanes
  output logic [W_LANES*32-1:0]   acc_o
);
  always_comb begin
    for (int l = 0; l < int'(W_LANES); l++) begin
      logic signed [7:0]  ai, bi;
      logic signed [31:0] prod, acc;
      ai   = a[l*8 +: 8];
      bi   = b[l*8 +: 8];
      acc  = acc_i[l*32 +: 32];
      prod = 32'(ai) * 32'(bi);
      unique case (op)
        ALU_ADD: acc_o[l*32 +: 32] = 32'(ai) + 32'(bi);
        ALU_MUL: acc_o[l*32 +: 32] = prod;
        ALU_MAC: acc_o[l*32 +: 32] = acc + prod;
        default: acc_o[l*32 +: 32] = acc;
      endcase
    end
  end
endmodule
