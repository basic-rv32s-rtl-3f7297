// tb_branch_predictor: trains the 2-bit counter with random outcomes and
// compares the prediction with a saturating-counter model; checks the
// branch target (pc + B-immediate) and that non-branches are never
// predicted taken.
module tb_branch_predictor;
  import rv32_pkg::*;
  logic clk = 0, rst, en, ex_branch, ex_taken, b_est;
  logic [31:0] if_pc, if_instr, b_target;
  int model, checks = 0, failures = 0;
  logic [12:0] off;

  branch_predictor dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 1; ex_branch = 0; ex_taken = 0; if_pc = 0; if_instr = NOP_INSTR;
    @(posedge clk); #1 rst = 0; model = 1;
    for (int i = 0; i < 500; i++) begin
      off = {12'($urandom), 1'b0};
      if_pc = $urandom & ~32'h3;
      if_instr = {off[12], off[10:5], 5'($urandom), 5'($urandom), 3'($urandom), off[4:1], off[11], OP_BRANCH};
      if (i % 7 == 0) if_instr[6:0] = OP_OP;
      #1;
      checks++;
      if (b_est !== ((if_instr[6:0] == OP_BRANCH) && model >= 2)) begin
        failures++; $display("i %0d b_est %b model %0d", i, b_est, model);
      end
      checks++;
      if (b_target !== if_pc + {{19{off[12]}}, off}) begin
        failures++; $display("target %h exp %h", b_target, if_pc + {{19{off[12]}}, off});
      end
      ex_branch = $urandom_range(0, 1); ex_taken = (i < 250) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      en = $urandom_range(0, 7) != 0;
      @(posedge clk);
      if (en && ex_branch) model = ex_taken ? ((model < 3) ? model + 1 : 3) : ((model > 0) ? model - 1 : 0);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
