// branch_logic: resolves control flow in the EX stage (combinational).
// For a branch, the outcome comes from the ALU (SUB for BEQ/BNE via
// alu_zero, SLT/SLTU for the others via alu_result[0]) and funct3. It is
// compared with the IF-stage prediction b_est: a mismatch is a misprediction
// (bp_miss) and the fetch must restart at the branch target (taken) or at
// pc+4 (not taken). JAL and JALR (jump) always redirect, to the ALU sum
// (PC+imm, or rs1+imm with bit 0 cleared for JALR). ex_redirect/ex_target
// go to the PC controller and the hazard unit (which flushes IF/ID and
// ID/EX). Signal names follow the core diagram (Branch, BTaken, BP_Miss,
// ALUzero, EX_Jump); resolving jumps in EX is this design's choice.
module branch_logic (
  input  logic        valid,
  input  logic        branch,
  input  logic        jump,
  input  logic [2:0]  funct3,
  input  logic        alu_zero,
  input  logic [31:0] alu_result,
  input  logic        b_est,
  input  logic [31:0] pc,
  input  logic [31:0] imm,
  output logic        b_taken,
  output logic        bp_miss,
  output logic        ex_redirect,
  output logic [31:0] ex_target
);
  logic cond;
  logic [31:0] pc4, br_target;

  always_comb begin
    unique case (funct3)
      3'b000:  cond = alu_zero;        // BEQ
      3'b001:  cond = !alu_zero;       // BNE
      3'b100,
      3'b110:  cond = alu_result[0];   // BLT, BLTU
      3'b101,
      3'b111:  cond = !alu_result[0];  // BGE, BGEU
      default: cond = 1'b0;
    endcase
    pc4       = pc + 32'd4;
    br_target = pc + imm;
    b_taken   = valid && branch && cond;
    bp_miss   = valid && branch && (cond != b_est);
    ex_redirect = bp_miss || (valid && jump);
    if (valid && jump)  ex_target = {alu_result[31:1], 1'b0};
    else if (cond)      ex_target = br_target;
    else                ex_target = pc4;
  end
endmodule
