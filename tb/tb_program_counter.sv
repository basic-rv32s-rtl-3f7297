// tb_program_counter: checks reset, load, stall and clock-enable behaviour
// of the PC register against a reference register kept in the testbench.
module tb_program_counter;
  logic clk = 0, rst, en, stall;
  logic [31:0] next_pc, pc, model;
  int checks = 0, failures = 0;

  program_counter #(.RESET_PC(32'h0000_0100)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 0; stall = 0; next_pc = '0;
    @(posedge clk); #1;
    checks++; if (pc !== 32'h100) begin failures++; $display("reset value %h", pc); end
    rst = 0; model = 32'h100;
    for (int i = 0; i < 300; i++) begin
      en = $urandom_range(0, 3) != 0; stall = $urandom_range(0, 3) == 0; next_pc = $urandom;
      @(posedge clk);
      if (en && !stall) model = next_pc;
      #1;
      checks++; if (pc !== model) begin failures++; $display("cycle %0d pc %h exp %h", i, pc, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
