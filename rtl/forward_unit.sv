// forward_unit: supplies the EX stage with the newest value of its operands
// (combinational).
// The value an instruction in MEM will write back is chosen by its
// write-back source: ALU result, U-immediate, PC+4 or CSR read data (a load
// in MEM never needs forwarding: the hazard unit's load-use stall prevents
// it). The WB value is the one being written to the register file. For each
// of rs1/rs2, hazard_mem takes the MEM value, else hazard_wb the WB value,
// else the register value read in ID. The CSR operand is forwarded the same
// way from pending CSR writes (csr_hazard_mem / csr_hazard_wb).
// The block and its MEM/WB sources (MEM.imm(U), MEM.ALUresult, MEM.CSR_RD,
// PC+4, WB data) follow the core diagram.
module forward_unit
  import rv32_pkg::*;
(
  input  logic [1:0]  hazard_mem,
  input  logic [1:0]  hazard_wb,
  input  logic        csr_hazard_mem,
  input  logic        csr_hazard_wb,
  input  logic [31:0] ex_rd1,
  input  logic [31:0] ex_rd2,
  input  logic [31:0] ex_csr_rdata,
  input  wb_sel_e     mem_wb_sel,
  input  logic [31:0] mem_alu_result,
  input  logic [31:0] mem_imm,
  input  logic [31:0] mem_pc4,
  input  logic [31:0] mem_csr_rdata,
  input  logic [31:0] mem_csr_wdata,
  input  logic [31:0] wb_data,
  input  logic [31:0] wb_csr_wdata,
  output logic [31:0] fwd_rs1,
  output logic [31:0] fwd_rs2,
  output logic [31:0] fwd_csr
);
  logic [31:0] mem_value;
  always_comb begin
    unique case (mem_wb_sel)
      WB_IMMU: mem_value = mem_imm;
      WB_PC4:  mem_value = mem_pc4;
      WB_CSR:  mem_value = mem_csr_rdata;
      default: mem_value = mem_alu_result;
    endcase
    fwd_rs1 = hazard_mem[0] ? mem_value : (hazard_wb[0] ? wb_data : ex_rd1);
    fwd_rs2 = hazard_mem[1] ? mem_value : (hazard_wb[1] ? wb_data : ex_rd2);
    fwd_csr = csr_hazard_mem ? mem_csr_wdata : (csr_hazard_wb ? wb_csr_wdata : ex_csr_rdata);
  end
endmodule
