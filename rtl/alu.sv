// alu: 32-bit integer ALU of the EX stage (combinational).
// Computes alu_result = src_a OP src_b for the ten RV32I operations and
// raises alu_zero when the result is zero (used by the branch logic).
// Shifts use src_b[4:0]. Port names follow the core diagram
// (srcA, srcB, ALUop, ALUresult, ALUzero).
module alu
  import rv32_pkg::*;
(
  input  alu_op_e     alu_ctrl,
  input  logic [31:0] src_a,
  input  logic [31:0] src_b,
  output logic [31:0] alu_result,
  output logic        alu_zero
);
  always_comb begin
    unique case (alu_ctrl)
      ALU_ADD:  alu_result = src_a + src_b;
      ALU_SUB:  alu_result = src_a - src_b;
      ALU_SLL:  alu_result = src_a << src_b[4:0];
      ALU_SLT:  alu_result = {31'b0, $signed(src_a) < $signed(src_b)};
      ALU_SLTU: alu_result = {31'b0, src_a < src_b};
      ALU_XOR:  alu_result = src_a ^ src_b;
      ALU_SRL:  alu_result = src_a >> src_b[4:0];
      ALU_SRA:  alu_result = $unsigned($signed(src_a) >>> src_b[4:0]);
      ALU_OR:   alu_result = src_a | src_b;
      ALU_AND:  alu_result = src_a & src_b;
      default:  alu_result = '0;
    endcase
    alu_zero = (alu_result == '0);
  end
endmodule
