// instruction_decoder: splits a 32-bit RV32I instruction into its fields
// (combinational): opcode, funct3, funct7, rs1, rs2, rd, and raw_imm, the
// upper 25 bits [31:7] from which imm_gen assembles every immediate format.
// Output names follow the core diagram; field positions are the RISC-V ISA's.
module instruction_decoder (
  input  logic [31:0] instr,
  output logic [6:0]  opcode,
  output logic [2:0]  funct3,
  output logic [6:0]  funct7,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic [4:0]  rd,
  output logic [24:0] raw_imm
);
  always_comb begin
    opcode  = instr[6:0];
    rd      = instr[11:7];
    funct3  = instr[14:12];
    rs1     = instr[19:15];
    rs2     = instr[24:20];
    funct7  = instr[31:25];
    raw_imm = instr[31:7];
  end
endmodule
