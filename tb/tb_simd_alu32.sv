// tb_simd_alu32: checks ADD, MUL and MAC of the 32-lane INT8 ALU against a
// lane-by-lane reference computed here, on corner values and random data.
module tb_simd_alu32;
  import lpspec_pkg::*;
  alu_op_e        op;
  logic [255:0]   a, b;
  logic [1023:0]  acc_i, acc_o;
  int checks = 0, failures = 0;

  simd_alu32 dut (.op, .a, .b, .acc_i, .acc_o);

  task automatic check_all();
    for (int l = 0; l < 32; l++) begin
      int ai, bi, ac, exp;
      ai = int'($signed(a[l*8 +: 8]));
      bi = int'($signed(b[l*8 +: 8]));
      ac = int'($signed(acc_i[l*32 +: 32]));
      case (op)
        ALU_ADD: exp = ai + bi;
        ALU_MUL: exp = ai * bi;
        default: exp = ac + ai * bi;
      endcase
      checks++;
      if (int'($signed(acc_o[l*32 +: 32])) != exp) begin
        failures++;
        $display("FAIL op=%0d lane=%0d a=%0d b=%0d acc=%0d got=%0d exp=%0d", op, l, ai, bi, ac,
                 $signed(acc_o[l*32 +: 32]), exp);
      end
    end
  endtask

  initial begin
    // corners: -128 * -128, 127 * -128
    a = '0; b = '0; acc_i = '0;
    for (int l = 0; l < 32; l++) begin
      a[l*8 +: 8] = (l % 2) ? 8'h80 : 8'h7f;
      b[l*8 +: 8] = 8'h80;
      acc_i[l*32 +: 32] = 32'(l * 1000 - 7000);
    end
    foreach (op_list[i]) begin op = op_list[i]; #1; check_all(); end
    for (int t = 0; t < 200; t++) begin
      for (int w = 0; w < 8; w++) begin a[w*32 +: 32] = $urandom; b[w*32 +: 32] = $urandom; end
      for (int w = 0; w < 32; w++) acc_i[w*32 +: 32] = $urandom;
      op = op_list[t % 3];
      #1; check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  alu_op_e op_list [3] = '{ALU_ADD, ALU_MUL, ALU_MAC};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
