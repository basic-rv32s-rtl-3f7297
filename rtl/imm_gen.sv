// imm_gen: builds the 32-bit immediate of an RV32I instruction from raw_imm
// (instruction bits [31:7]) for the format chosen by the opcode
// (combinational). I: loads, OP-IMM, JALR; S: stores; B: branches;
// U: LUI/AUIPC; J: JAL. Every other opcode (including SYSTEM, whose low
// 12 immediate bits are the CSR address) gets the I format.
// The block is named in the core diagram; the formats are the ISA's.
module imm_gen
  import rv32_pkg::*;
(
  input  logic [6:0]  opcode,
  input  logic [24:0] raw_imm,
  output logic [31:0] imm
);
  logic [31:0] ins;
  always_comb begin
    ins = {raw_imm, 7'b0};
    unique case (opcode)
      OP_STORE:          imm = {{20{ins[31]}}, ins[31:25], ins[11:7]};
      OP_BRANCH:         imm = {{20{ins[31]}}, ins[7], ins[30:25], ins[11:8], 1'b0};
      OP_LUI, OP_AUIPC:  imm = {ins[31:12], 12'b0};
      OP_JAL:            imm = {{12{ins[31]}}, ins[19:12], ins[20], ins[30:21], 1'b0};
      default:           imm = {{20{ins[31]}}, ins[31:20]};
    endcase
  end
endmodule
