// control_unit: main decoder of the ID stage (combinational).
// From opcode, funct3 and the rs1 field it produces the control bundle
// ctrl_t: RegWrite, MemRead, MemWrite, Branch, Jump, ALUSrcA/ALUSrcB, ALUOp,
// the write-back source (MemToReg) and CSR_Write. CSR instructions write the
// CSR unless they are CSRRS/CSRRC(I) with rs1/zimm = 0, as the Zicsr
// extension requires. SYSTEM instructions with funct3 = 0 (ECALL, EBREAK,
// MRET) and unknown opcodes produce no datapath action; the exception
// detector and trap controller handle them. FENCE is executed as a no-op.
// The signal names are those of the core diagram; the encodings are this
// design's (see rv32_pkg).
module control_unit
  import rv32_pkg::*;
(
  input  logic [6:0] opcode,
  input  logic [2:0] funct3,
  input  logic [4:0] rs1,
  output ctrl_t      ctrl
);
  always_comb begin
    ctrl = CTRL_NOP;
    unique case (opcode)
      OP_LUI:    begin ctrl.reg_write = 1'b1; ctrl.wb_sel = WB_IMMU; end
      OP_AUIPC:  begin ctrl.reg_write = 1'b1; ctrl.alu_src_a = 1'b1; ctrl.alu_src_b = 1'b1;
                       ctrl.alu_op = AOP_ADD; ctrl.wb_sel = WB_ALU; end
      OP_JAL:    begin ctrl.reg_write = 1'b1; ctrl.jump = 1'b1; ctrl.alu_src_a = 1'b1;
                       ctrl.alu_src_b = 1'b1; ctrl.wb_sel = WB_PC4; end
      OP_JALR:   begin ctrl.reg_write = 1'b1; ctrl.jump = 1'b1; ctrl.alu_src_b = 1'b1;
                       ctrl.wb_sel = WB_PC4; end
      OP_BRANCH: begin ctrl.branch = 1'b1; ctrl.alu_op = AOP_BRANCH; end
      OP_LOAD:   begin ctrl.reg_write = 1'b1; ctrl.mem_read = 1'b1; ctrl.alu_src_b = 1'b1;
                       ctrl.wb_sel = WB_DMEM; end
      OP_STORE:  begin ctrl.mem_write = 1'b1; ctrl.alu_src_b = 1'b1; end
      OP_IMM:    begin ctrl.reg_write = 1'b1; ctrl.alu_src_b = 1'b1; ctrl.alu_op = AOP_ITYPE;
                       ctrl.wb_sel = WB_ALU; end
      OP_OP:     begin ctrl.reg_write = 1'b1; ctrl.alu_op = AOP_RTYPE; ctrl.wb_sel = WB_ALU; end
      OP_SYSTEM: if (funct3 != 3'b000 && funct3 != 3'b100) begin
                   ctrl.reg_write = 1'b1;
                   ctrl.wb_sel    = WB_CSR;
                   ctrl.csr_write = (funct3[1:0] == 2'b01) || (rs1 != 5'd0);
                 end
      default: ;
    endcase
  end
endmodule
