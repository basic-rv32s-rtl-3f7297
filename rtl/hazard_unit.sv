// hazard_unit: detects the pipeline's data and control hazards
// (combinational).
// Data hazards on the integer registers: hazard_mem[i] / hazard_wb[i] flag
// that source i (0: rs1, 1: rs2) of the instruction in EX is written by the
// instruction in MEM / WB; the forward unit then takes the value from that
// stage (MEM has priority, being younger). CSR hazards: csr_hazard_mem /
// csr_hazard_wb flag that the CSR read by the EX instruction is written by
// the MEM / WB instruction. Load-use: the EX instruction loads a register
// the ID instruction reads; its value exists only at the end of MEM, so PC
// and IF/ID hold for one cycle and a bubble enters ID/EX.
// Control: on a trap redirect (trapped) or an EX redirect (jump or branch
// misprediction) IF/ID and ID/EX are flushed; while the trap controller is
// busy, PC and IF/ID hold and bubbles enter ID/EX.
// Output names follow the core diagram (PC_Stall, IF/ID flush/stall,
// hazard_mem, hazard_wb, csr_hazard_mem, csr_hazard_wb); the priorities are
// this design's choice.
module hazard_unit (
  // ID stage
  input  logic [4:0]  id_rs1,
  input  logic [4:0]  id_rs2,
  input  logic        id_use_rs1,
  input  logic        id_use_rs2,
  // EX stage
  input  logic        ex_valid,
  input  logic        ex_mem_read,
  input  logic [4:0]  ex_rd,
  input  logic [4:0]  ex_rs1,
  input  logic [4:0]  ex_rs2,
  input  logic        ex_csr_read,
  input  logic [11:0] ex_csr_addr,
  // MEM stage
  input  logic        mem_valid,
  input  logic        mem_reg_write,
  input  logic [4:0]  mem_rd,
  input  logic        mem_csr_write,
  input  logic [11:0] mem_csr_addr,
  // WB stage
  input  logic        wb_valid,
  input  logic        wb_reg_write,
  input  logic [4:0]  wb_rd,
  input  logic        wb_csr_write,
  input  logic [11:0] wb_csr_addr,
  // control flow
  input  logic        ex_redirect,
  input  logic        trap_busy,
  input  logic        trapped,
  output logic [1:0]  hazard_mem,
  output logic [1:0]  hazard_wb,
  output logic        csr_hazard_mem,
  output logic        csr_hazard_wb,
  output logic        load_use,
  output logic        pc_stall,
  output logic        if_id_stall,
  output logic        if_id_flush,
  output logic        id_ex_flush
);
  always_comb begin
    hazard_mem[0] = mem_valid && mem_reg_write && mem_rd != 5'd0 && mem_rd == ex_rs1;
    hazard_mem[1] = mem_valid && mem_reg_write && mem_rd != 5'd0 && mem_rd == ex_rs2;
    hazard_wb[0]  = wb_valid  && wb_reg_write  && wb_rd  != 5'd0 && wb_rd  == ex_rs1;
    hazard_wb[1]  = wb_valid  && wb_reg_write  && wb_rd  != 5'd0 && wb_rd  == ex_rs2;
    csr_hazard_mem = ex_csr_read && mem_valid && mem_csr_write && mem_csr_addr == ex_csr_addr;
    csr_hazard_wb  = ex_csr_read && wb_valid  && wb_csr_write  && wb_csr_addr  == ex_csr_addr;

    load_use = ex_valid && ex_mem_read && ex_rd != 5'd0 &&
               ((id_use_rs1 && ex_rd == id_rs1) || (id_use_rs2 && ex_rd == id_rs2));

    pc_stall    = 1'b0;
    if_id_stall = 1'b0;
    if_id_flush = 1'b0;
    id_ex_flush = 1'b0;
    if (trapped || ex_redirect) begin
      if_id_flush = 1'b1;
      id_ex_flush = 1'b1;
    end else if (trap_busy || load_use) begin
      pc_stall    = 1'b1;
      if_id_stall = 1'b1;
      id_ex_flush = 1'b1;
    end
  end
endmodule
