// tb_instruction_decoder: random instruction words, each field compared
// with a slice taken in the testbench.
module tb_instruction_decoder;
  logic [31:0] instr;
  logic [6:0] opcode, funct7; logic [2:0] funct3; logic [4:0] rs1, rs2, rd; logic [24:0] raw_imm;
  int checks = 0, failures = 0;
  instruction_decoder dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 300; i++) begin
      instr = $urandom; #1;
      checks++;
      if ({funct7, rs2, rs1, funct3, rd, opcode} !== instr || raw_imm !== instr[31:7]) begin
        failures++; $display("instr %h", instr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
