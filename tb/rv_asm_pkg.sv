// rv_asm_pkg: RV32I/Zicsr instruction encoders for the testbenches, so that
// test programs can be written as readable instruction lists. Each function
// returns the 32-bit machine word of one instruction (RISC-V ISA formats).
package rv_asm_pkg;
  function automatic logic [31:0] enc_r(input logic [6:0] f7, input int rs2, rs1,
                                        input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_i(input int imm, rs1, input logic [2:0] f3, input int rd,
                                        input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_s(input int imm, rs2, rs1, input logic [2:0] f3);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(input int off, rs2, rs1, input logic [2:0] f3);
    logic [12:0] i; i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] LUI(input int rd, imm20);   return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] AUIPC(input int rd, imm20); return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  function automatic logic [31:0] JAL(input int rd, off);
    logic [20:0] i; i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(input int rd, rs1, imm); return enc_i(imm, rs1, 3'd0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] BEQ(input int rs1, rs2, off);  return enc_b(off, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] BNE(input int rs1, rs2, off);  return enc_b(off, rs2, rs1, 3'd1); endfunction
  function automatic logic [31:0] BLT(input int rs1, rs2, off);  return enc_b(off, rs2, rs1, 3'd4); endfunction
  function automatic logic [31:0] BGE(input int rs1, rs2, off);  return enc_b(off, rs2, rs1, 3'd5); endfunction
  function automatic logic [31:0] BLTU(input int rs1, rs2, off); return enc_b(off, rs2, rs1, 3'd6); endfunction
  function automatic logic [31:0] BGEU(input int rs1, rs2, off); return enc_b(off, rs2, rs1, 3'd7); endfunction
  function automatic logic [31:0] LB(input int rd, rs1, imm);  return enc_i(imm, rs1, 3'd0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH(input int rd, rs1, imm);  return enc_i(imm, rs1, 3'd1, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LW(input int rd, rs1, imm);  return enc_i(imm, rs1, 3'd2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LBU(input int rd, rs1, imm); return enc_i(imm, rs1, 3'd4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LHU(input int rd, rs1, imm); return enc_i(imm, rs1, 3'd5, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SB(input int rs2, rs1, imm); return enc_s(imm, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] SH(input int rs2, rs1, imm); return enc_s(imm, rs2, rs1, 3'd1); endfunction
  function automatic logic [31:0] SW(input int rs2, rs1, imm); return enc_s(imm, rs2, rs1, 3'd2); endfunction
  function automatic logic [31:0] ADDI(input int rd, rs1, imm);  return enc_i(imm, rs1, 3'd0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTI(input int rd, rs1, imm);  return enc_i(imm, rs1, 3'd2, rd, 7'b0010011); endfunction
  function automatic logic [31:0] XORI(input int rd, rs1, imm);  return enc_i(imm, rs1, 3'd4, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ANDI(input int rd, rs1, imm);  return enc_i(imm, rs1, 3'd7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(input int rd, rs1, sh);   return enc_i(sh, rs1, 3'd1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRLI(input int rd, rs1, sh);   return enc_i(sh, rs1, 3'd5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(input int rd, rs1, sh);   return enc_i(sh | 32'h400, rs1, 3'd5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ADD(input int rd, rs1, rs2);  return enc_r(7'h00, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB(input int rd, rs1, rs2);  return enc_r(7'h20, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT(input int rd, rs1, rs2);  return enc_r(7'h00, rs2, rs1, 3'd2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLTU(input int rd, rs1, rs2); return enc_r(7'h00, rs2, rs1, 3'd3, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR(input int rd, rs1, rs2);  return enc_r(7'h00, rs2, rs1, 3'd4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRL(input int rd, rs1, rs2);  return enc_r(7'h00, rs2, rs1, 3'd5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] OR(input int rd, rs1, rs2);   return enc_r(7'h00, rs2, rs1, 3'd6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] AND(input int rd, rs1, rs2);  return enc_r(7'h00, rs2, rs1, 3'd7, rd, 7'b0110011); endfunction
  function automatic logic [31:0] CSRRW(input int rd, csr, rs1);  return enc_i(csr, rs1, 3'd1, rd, 7'b1110011); endfunction
  function automatic logic [31:0] CSRRS(input int rd, csr, rs1);  return enc_i(csr, rs1, 3'd2, rd, 7'b1110011); endfunction
  function automatic logic [31:0] CSRRC(input int rd, csr, rs1);  return enc_i(csr, rs1, 3'd3, rd, 7'b1110011); endfunction
  function automatic logic [31:0] CSRRWI(input int rd, csr, zimm); return enc_i(csr, zimm, 3'd5, rd, 7'b1110011); endfunction
  function automatic logic [31:0] ECALL();  return 32'h0000_0073; endfunction
  function automatic logic [31:0] EBREAK(); return 32'h0010_0073; endfunction
  function automatic logic [31:0] MRET();   return 32'h3020_0073; endfunction
  function automatic logic [31:0] NOP();    return 32'h0000_0013; endfunction
  function automatic logic [31:0] HALT();   return 32'h0000_006F; endfunction  // jal x0, 0
endpackage
