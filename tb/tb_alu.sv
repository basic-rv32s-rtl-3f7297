// tb_alu: random and corner operands for all ten operations; reference
// results use 64-bit arithmetic in the testbench.
module tb_alu;
  import rv32_pkg::*;
  alu_op_e alu_ctrl; logic [31:0] src_a, src_b, alu_result, exp; logic alu_zero;
  int checks = 0, failures = 0;
  logic [31:0] corner [6] = '{32'h0, 32'h1, 32'h7FFF_FFFF, 32'h8000_0000, 32'hFFFF_FFFF, 32'h1F};
  alu dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      alu_ctrl = alu_op_e'(i % 10);
      src_a = (i % 3 == 0) ? corner[$urandom_range(0, 5)] : $urandom;
      src_b = (i % 5 == 0) ? corner[$urandom_range(0, 5)] : (i % 4 == 0) ? src_a : $urandom;
      #1;
      case (alu_ctrl)
        ALU_ADD:  exp = 32'(longint'(src_a) + longint'(src_b));
        ALU_SUB:  exp = 32'(longint'(src_a) - longint'(src_b));
        ALU_SLL:  exp = 32'(64'(src_a) << src_b[4:0]);
        ALU_SLT:  exp = (longint'($signed(src_a)) < longint'($signed(src_b))) ? 1 : 0;
        ALU_SLTU: exp = (longint'(src_a) < longint'(src_b)) ? 1 : 0;
        ALU_XOR:  exp = src_a ^ src_b;
        ALU_SRL:  exp = 32'(64'(src_a) >> src_b[4:0]);
        ALU_SRA:  exp = 32'(longint'($signed(src_a)) >>> src_b[4:0]);
        ALU_OR:   exp = src_a | src_b;
        default:  exp = src_a & src_b;
      endcase
      checks++;
      if (alu_result !== exp || alu_zero !== (exp == 0)) begin
        failures++; $display("%s a %h b %h got %h exp %h", alu_ctrl.name(), src_a, src_b, alu_result, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
