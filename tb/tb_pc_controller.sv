// tb_pc_controller: random selects; the expected next PC follows the
// priority trap > EX redirect > prediction > pc+4.
module tb_pc_controller;
  logic trapped, ex_redirect, b_est;
  logic [31:0] t_target, ex_target, b_target, pc4, next_pc, exp;
  int checks = 0, failures = 0;
  pc_controller dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 400; i++) begin
      {trapped, ex_redirect, b_est} = 3'($urandom);
      t_target = $urandom; ex_target = $urandom; b_target = $urandom; pc4 = $urandom;
      #1;
      exp = trapped ? t_target : ex_redirect ? ex_target : b_est ? b_target : pc4;
      checks++; if (next_pc !== exp) begin failures++; $display("sel %b%b%b got %h exp %h", trapped, ex_redirect, b_est, next_pc, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
