// tb_branch_logic: random branch operands; the testbench plays the ALU
// (SUB/SLT/SLTU as the ALU controller would choose) and computes the
// expected outcome by comparing the operands directly. Checks taken,
// misprediction against a random prediction, redirect and target; jumps
// always redirect to the ALU sum with bit 0 cleared.
module tb_branch_logic;
  logic valid, branch, jump, alu_zero, b_est, b_taken, bp_miss, ex_redirect;
  logic [2:0] funct3; logic [31:0] alu_result, pc, imm, ex_target, a, b, exp_t;
  logic cond;
  int checks = 0, failures = 0;
  logic [2:0] f3s [6] = '{3'd0, 3'd1, 3'd4, 3'd5, 3'd6, 3'd7};
  branch_logic dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1500; i++) begin
      valid = $urandom_range(0, 7) != 0; jump = (i % 5 == 0); branch = !jump;
      funct3 = f3s[$urandom_range(0, 5)]; a = $urandom; b = (i % 3 == 0) ? a : $urandom;
      if (i % 7 == 0) b = ~a;
      b_est = $urandom_range(0, 1); pc = $urandom & ~32'h3; imm = 32'($signed(13'($urandom)) & ~13'h1);
      unique case (funct3)
        3'd0, 3'd1: alu_result = a - b;
        3'd4, 3'd5: alu_result = {31'b0, $signed(a) < $signed(b)};
        default:    alu_result = {31'b0, a < b};
      endcase
      if (jump) alu_result = $urandom;
      alu_zero = (alu_result == 0);
      #1;
      case (funct3)
        3'd0: cond = (a == b); 3'd1: cond = (a != b);
        3'd4: cond = ($signed(a) < $signed(b)); 3'd5: cond = ($signed(a) >= $signed(b));
        3'd6: cond = (a < b); default: cond = (a >= b);
      endcase
      checks++;
      if (jump) begin
        if (ex_redirect !== valid || (valid && ex_target !== (alu_result & ~32'h1)) || bp_miss || b_taken) begin
          failures++; $display("jump i %0d redirect %b target %h", i, ex_redirect, ex_target);
        end
      end else begin
        exp_t = cond ? pc + imm : pc + 4;
        if (b_taken !== (valid && cond) || bp_miss !== (valid && cond != b_est) ||
            ex_redirect !== (valid && cond != b_est) || (valid && ex_target !== exp_t)) begin
          failures++; $display("br i %0d f3 %0d a %h b %h taken %b miss %b target %h exp %h", i, funct3, a, b, b_taken, bp_miss, ex_target, exp_t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
