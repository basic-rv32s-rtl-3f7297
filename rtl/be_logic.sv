// be_logic: byte-enable logic of the MEM stage (combinational).
// Stores: from funct3 (SB/SH/SW) and address[1:0] it forms the 4-bit byte
// write mask and moves the store data (RD2) onto the addressed byte lanes
// (BEDM_WD). Loads: from the memory word DM_RD it extracts the addressed
// byte/halfword and sign- or zero-extends it (LB/LH/LW/LBU/LHU) to BERF_WD.
// Misaligned accesses are not trapped; the lanes are taken modulo the word.
// Port names follow the core diagram; no misalignment check is this design's
// choice (the paper lists full exception handling as future work).
module be_logic (
  input  logic        mem_write,
  input  logic [2:0]  funct3,
  input  logic [1:0]  addr_lo,
  input  logic [31:0] rd2,
  input  logic [31:0] dm_rd,
  output logic [3:0]  byte_en,
  output logic [31:0] bedm_wd,
  output logic [31:0] berf_wd
);
  logic [31:0] shifted;
  always_comb begin
    unique case (funct3[1:0])
      2'b00:   begin byte_en = 4'b0001 << addr_lo;            bedm_wd = {4{rd2[7:0]}};  end
      2'b01:   begin byte_en = 4'b0011 << {addr_lo[1], 1'b0}; bedm_wd = {2{rd2[15:0]}}; end
      default: begin byte_en = 4'b1111;                       bedm_wd = rd2;            end
    endcase
    if (!mem_write) byte_en = 4'b0000;

    shifted = dm_rd >> {addr_lo, 3'b000};
    unique case (funct3)
      3'b000:  berf_wd = {{24{shifted[7]}},  shifted[7:0]};
      3'b001:  berf_wd = {{16{shifted[15]}}, shifted[15:0]};
      3'b100:  berf_wd = {24'b0, shifted[7:0]};
      3'b101:  berf_wd = {16'b0, shifted[15:0]};
      default: berf_wd = dm_rd;
    endcase
  end
endmodule
