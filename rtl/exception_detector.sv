// exception_detector: finds instructions in ID that need the trap controller
// (combinational). ECALL (0x00000073), EBREAK (0x00100073) and MRET
// (0x30200073) are recognised by their full encoding; an opcode outside
// RV32I/Zicsr, or a SYSTEM instruction with funct3 = 0 or 100 that is none of
// the three, is reported as illegal. Output trap_kind is TRAP_NONE for an
// invalid (bubble) slot. The paper names ECALL, EBREAK and MRET as the
// instructions this block integrates; reporting illegal opcodes is this
// design's addition within the same mechanism.
module exception_detector
  import rv32_pkg::*;
(
  input  logic        valid,
  input  logic [31:0] instr,
  output trap_kind_e  trap_kind
);
  always_comb begin
    trap_kind = TRAP_NONE;
    if (valid) begin
      unique case (instr[6:0])
        OP_LUI, OP_AUIPC, OP_JAL, OP_JALR, OP_BRANCH, OP_LOAD,
        OP_STORE, OP_IMM, OP_OP, OP_FENCE: trap_kind = TRAP_NONE;
        OP_SYSTEM: begin
          if (instr == 32'h0000_0073)      trap_kind = TRAP_ECALL;
          else if (instr == 32'h0010_0073) trap_kind = TRAP_EBREAK;
          else if (instr == 32'h3020_0073) trap_kind = TRAP_MRET;
          else if (instr[13:12] == 2'b00)  trap_kind = TRAP_ILLEGAL;
        end
        default: trap_kind = TRAP_ILLEGAL;
      endcase
    end
  end
endmodule
