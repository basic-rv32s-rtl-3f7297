// tb_alu_controller: all ALUOp classes with all funct3 values and both
// funct7[5] settings, compared with the RV32I operation table.
module tb_alu_controller;
  import rv32_pkg::*;
  alu_op_class_e alu_op; logic [2:0] funct3; logic [6:0] funct7; alu_op_e alu_ctrl, exp;
  int checks = 0, failures = 0;
  alu_controller dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 4; c++) for (int f = 0; f < 8; f++) for (int s = 0; s < 2; s++) begin
      alu_op = alu_op_class_e'(c); funct3 = 3'(f); funct7 = s ? 7'b0100000 : 7'b0000000;
      #1;
      if (alu_op == AOP_ADD) exp = ALU_ADD;
      else if (alu_op == AOP_BRANCH) exp = (f < 2) ? ALU_SUB : (f < 6) ? ALU_SLT : ALU_SLTU;
      else case (f)
        0: exp = (alu_op == AOP_RTYPE && s) ? ALU_SUB : ALU_ADD;
        1: exp = ALU_SLL; 2: exp = ALU_SLT; 3: exp = ALU_SLTU; 4: exp = ALU_XOR;
        5: exp = s ? ALU_SRA : ALU_SRL; 6: exp = ALU_OR; default: exp = ALU_AND;
      endcase
      if (alu_op == AOP_BRANCH && (f == 2 || f == 3)) continue;  // no such branch
      checks++; if (alu_ctrl !== exp) begin failures++; $display("op %0d f3 %0d f7 %0d got %s exp %s", c, f, s, alu_ctrl.name(), exp.name()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
