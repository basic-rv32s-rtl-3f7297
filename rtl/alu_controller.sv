// alu_controller: picks the ALU operation (combinational) from the control
// unit's ALUOp class and the instruction's funct3/funct7, as in the
// Patterson & Hennessy design the paper follows.
//   AOP_ADD    -> ADD (address and PC-relative sums)
//   AOP_BRANCH -> SUB for BEQ/BNE, SLT for BLT/BGE, SLTU for BLTU/BGEU
//   AOP_RTYPE  -> funct3, with funct7[5] choosing SUB/SRA
//   AOP_ITYPE  -> funct3, with funct7[5] choosing SRAI (no SUBI exists)
module alu_controller
  import rv32_pkg::*;
(
  input  alu_op_class_e alu_op,
  input  logic [2:0]    funct3,
  input  logic [6:0]    funct7,
  output alu_op_e       alu_ctrl
);
  always_comb begin
    alu_ctrl = ALU_ADD;
    unique case (alu_op)
      AOP_ADD: alu_ctrl = ALU_ADD;
      AOP_BRANCH: begin
        unique case (funct3[2:1])
          2'b00:   alu_ctrl = ALU_SUB;
          2'b10:   alu_ctrl = ALU_SLT;
          2'b11:   alu_ctrl = ALU_SLTU;
          default: alu_ctrl = ALU_SUB;
        endcase
      end
      AOP_RTYPE, AOP_ITYPE: begin
        unique case (funct3)
          3'b000: alu_ctrl = (alu_op == AOP_RTYPE && funct7[5]) ? ALU_SUB : ALU_ADD;
          3'b001: alu_ctrl = ALU_SLL;
          3'b010: alu_ctrl = ALU_SLT;
          3'b011: alu_ctrl = ALU_SLTU;
          3'b100: alu_ctrl = ALU_XOR;
          3'b101: alu_ctrl = funct7[5] ? ALU_SRA : ALU_SRL;
          3'b110: alu_ctrl = ALU_OR;
          3'b111: alu_ctrl = ALU_AND;
          default: alu_ctrl = ALU_ADD;
        endcase
      end
      default: alu_ctrl = ALU_ADD;
    endcase
  end
endmodule
