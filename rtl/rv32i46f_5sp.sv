// rv32i46f_5sp: the RV32I46F_5SP core, a 5-stage pipelined RV32I processor
// with the Zicsr extension and machine-mode traps for ECALL, EBREAK and MRET.
//
// Stages: IF (PC, PC+4, instruction memory, 2-bit branch predictor, PC
// controller), ID (decoder, immediate generator, control unit, register
// file, CSR read, exception detector), EX (ALU controller, ALU, branch
// logic, forwarded operands, CSR new-value computation), MEM (byte-enable
// logic, data memory, data-side bypass into the instruction memory, choice
// of the write-back value), WB (register-file and CSR writes, retire count).
//
// Hazards: results are forwarded to EX from the MEM and WB stages, and from
// WB to ID through the register file's write-through; a load followed by a
// dependent instruction stalls one cycle. Conditional branches are predicted
// in IF; branches and jumps are resolved in EX, where a misprediction or a
// jump flushes IF/ID and ID/EX (2-cycle penalty). A trap or MRET found in ID
// stalls the front end, lets the older instructions drain, then the trap
// controller writes mepc/mcause and redirects the fetch.
//
// Memory map (this design's choice, the paper gives none): byte addresses
// 0x0000_0000-0x0FFF_FFFF are the instruction memory (fetch, and read-only
// for loads through the bypass port), everything else is the data memory;
// both wrap at their size. Program loading uses prog_* (word writes to the
// instruction memory). en is the clock enable the paper adds for
// single-stepping: with en low no state changes. The dbg_* outputs show the
// retiring (WB) instruction, the most recent register write, the EX ALU result and the
// mcycle/minstret counters for the SoC's debug and benchmark logic.
module rv32i46f_5sp
  import rv32_pkg::*;
#(
  parameter int          IMEM_WORDS = 4096,
  parameter int          DMEM_WORDS = 4096,
  parameter logic [31:0] RESET_PC   = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        prog_we,
  input  logic [31:0] prog_addr,
  input  logic [31:0] prog_wdata,
  output logic [31:0] dbg_pc,
  output logic [31:0] dbg_instruction,
  output logic        dbg_retire,
  output logic [4:0]  dbg_reg_addr,
  output logic [31:0] dbg_reg_data,
  output logic [31:0] dbg_alu_result,
  output logic [63:0] dbg_mcycle,
  output logic [63:0] dbg_minstret
);
  localparam if_id_t IF_ID_BUBBLE = '{valid: 1'b0, instr: NOP_INSTR, default: '0};

  // ---------------- control / hazard signals ----------------
  logic        pc_stall, if_id_stall, if_id_flush, id_ex_flush, load_use;
  logic [1:0]  hazard_mem, hazard_wb;
  logic        csr_hazard_mem, csr_hazard_wb;
  logic        ex_redirect, bp_miss, b_taken;
  logic [31:0] ex_target;
  logic        trap_busy, trapped, trap_done;
  logic [31:0] t_target;

  if_id_t  if_id_d,  if_id;
  id_ex_t  id_ex_d,  id_ex;
  ex_mem_t ex_mem_d, ex_mem;
  mem_wb_t mem_wb_d, mem_wb;

  // ---------------- IF ----------------
  logic [31:0] pc, pc4, next_pc, if_instr, b_target;
  logic        b_est;
  logic [31:0] rom_addr, rom_rdata;

  program_counter #(.RESET_PC(RESET_PC)) u_pc (
    .clk, .rst, .en, .stall(pc_stall), .next_pc, .pc);

  pc_plus4 u_pc4 (.pc, .pc4);

  instruction_memory #(.WORDS(IMEM_WORDS)) u_imem (
    .clk, .pc, .instr(if_instr), .rom_addr, .rom_rdata,
    .prog_we, .prog_addr, .prog_wdata);

  branch_predictor u_bp (
    .clk, .rst, .en, .if_pc(pc), .if_instr,
    .ex_branch(id_ex.valid && id_ex.ctrl.branch), .ex_taken(b_taken),
    .b_est, .b_target);

  pc_controller u_pcc (
    .trapped, .t_target, .ex_redirect, .ex_target, .b_est, .b_target, .pc4, .next_pc);

  always_comb if_id_d = '{valid: 1'b1, pc: pc, pc4: pc4, instr: if_instr, b_est: b_est};

  pipeline_register #(.T(if_id_t), .BUBBLE(IF_ID_BUBBLE)) u_if_id (
    .clk, .rst, .en, .stall(if_id_stall), .flush(if_id_flush), .d(if_id_d), .q(if_id));

  // ---------------- ID ----------------
  logic [6:0]  id_opcode, id_funct7;
  logic [2:0]  id_funct3;
  logic [4:0]  id_rs1, id_rs2, id_rd;
  logic [24:0] id_raw_imm;
  logic [31:0] id_imm, id_rd1, id_rd2, id_csr_rdata;
  ctrl_t       id_ctrl;
  logic        id_use_rs1, id_use_rs2;
  trap_kind_e  id_trap_raw, id_trap;
  logic [31:0] mtvec, mepc;
  logic        csr_t_we;
  logic [11:0] csr_t_wa;
  logic [31:0] csr_t_wd;
  logic [63:0] mcycle, minstret;

  instruction_decoder u_dec (
    .instr(if_id.instr), .opcode(id_opcode), .funct3(id_funct3), .funct7(id_funct7),
    .rs1(id_rs1), .rs2(id_rs2), .rd(id_rd), .raw_imm(id_raw_imm));

  imm_gen u_imm (.opcode(id_opcode), .raw_imm(id_raw_imm), .imm(id_imm));

  control_unit u_ctrl (.opcode(id_opcode), .funct3(id_funct3), .rs1(id_rs1), .ctrl(id_ctrl));

  register_file u_rf (
    .clk, .rst, .en,
    .reg_write(mem_wb.valid && mem_wb.ctrl.reg_write), .wa(mem_wb.rd), .wd(mem_wb.wb_data),
    .ra1(id_rs1), .ra2(id_rs2), .rd1(id_rd1), .rd2(id_rd2));

  csr_file u_csr (
    .clk, .rst, .en, .ra(if_id.instr[31:20]), .rdata(id_csr_rdata),
    .we(mem_wb.valid && mem_wb.ctrl.csr_write), .wa(mem_wb.csr_addr), .wd(mem_wb.csr_wdata),
    .t_we(csr_t_we), .t_wa(csr_t_wa), .t_wd(csr_t_wd),
    .retire(mem_wb.valid), .mtvec, .mepc, .mcycle, .minstret);

  exception_detector u_exc (.valid(if_id.valid), .instr(if_id.instr), .trap_kind(id_trap_raw));

  // A trap is taken only if the instruction is not on a path EX is discarding.
  always_comb id_trap = ex_redirect ? TRAP_NONE : id_trap_raw;

  trap_controller u_trap (
    .clk, .rst, .en, .trap_kind(id_trap), .pc(if_id.pc), .mtvec, .mepc,
    .busy(trap_busy), .trapped, .t_target, .trap_done,
    .csr_t_we, .csr_t_wa, .csr_t_wd);

  always_comb begin
    unique case (id_opcode)
      OP_JALR, OP_BRANCH, OP_LOAD, OP_STORE, OP_IMM, OP_OP: id_use_rs1 = 1'b1;
      OP_SYSTEM: id_use_rs1 = !id_funct3[2];
      default:   id_use_rs1 = 1'b0;
    endcase
    id_use_rs2 = (id_opcode == OP_BRANCH) || (id_opcode == OP_STORE) || (id_opcode == OP_OP);

    id_ex_d = '{valid: if_id.valid, pc: if_id.pc, pc4: if_id.pc4, instr: if_id.instr,
                b_est: if_id.b_est, ctrl: (if_id.valid ? id_ctrl : CTRL_NOP),
                funct3: id_funct3, funct7: id_funct7, rs1: id_rs1, rs2: id_rs2, rd: id_rd,
                imm: id_imm, rd1: id_rd1, rd2: id_rd2, csr_addr: if_id.instr[31:20],
                csr_rdata: id_csr_rdata};
  end

  pipeline_register #(.T(id_ex_t), .BUBBLE('0)) u_id_ex (
    .clk, .rst, .en, .stall(1'b0), .flush(id_ex_flush), .d(id_ex_d), .q(id_ex));

  // ---------------- EX ----------------
  alu_op_e     alu_ctrl;
  logic [31:0] fwd_rs1, fwd_rs2, fwd_csr, src_a, src_b, alu_result, csr_src, csr_new;
  logic        alu_zero;
  logic [31:0] mem_wb_value;

  forward_unit u_fwd (
    .hazard_mem, .hazard_wb, .csr_hazard_mem, .csr_hazard_wb,
    .ex_rd1(id_ex.rd1), .ex_rd2(id_ex.rd2), .ex_csr_rdata(id_ex.csr_rdata),
    .mem_wb_sel(ex_mem.ctrl.wb_sel), .mem_alu_result(ex_mem.alu_result),
    .mem_imm(ex_mem.imm), .mem_pc4(ex_mem.pc4), .mem_csr_rdata(ex_mem.csr_rdata),
    .mem_csr_wdata(ex_mem.csr_wdata), .wb_data(mem_wb.wb_data),
    .wb_csr_wdata(mem_wb.csr_wdata), .fwd_rs1, .fwd_rs2, .fwd_csr);

  alu_controller u_aluc (
    .alu_op(id_ex.ctrl.alu_op), .funct3(id_ex.funct3), .funct7(id_ex.funct7), .alu_ctrl);

  always_comb begin
    src_a = id_ex.ctrl.alu_src_a ? id_ex.pc  : fwd_rs1;
    src_b = id_ex.ctrl.alu_src_b ? id_ex.imm : fwd_rs2;
  end

  alu u_alu (.alu_ctrl, .src_a, .src_b, .alu_result, .alu_zero);

  branch_logic u_br (
    .valid(id_ex.valid), .branch(id_ex.ctrl.branch), .jump(id_ex.ctrl.jump),
    .funct3(id_ex.funct3), .alu_zero, .alu_result, .b_est(id_ex.b_est),
    .pc(id_ex.pc), .imm(id_ex.imm), .b_taken, .bp_miss, .ex_redirect, .ex_target);

  // Zicsr: CSRRW/CSRRS/CSRRC and their immediate (zimm = rs1 field) forms.
  always_comb begin
    csr_src = id_ex.funct3[2] ? {27'b0, id_ex.rs1} : fwd_rs1;
    unique case (id_ex.funct3[1:0])
      2'b01:   csr_new = csr_src;
      2'b10:   csr_new = fwd_csr | csr_src;
      2'b11:   csr_new = fwd_csr & ~csr_src;
      default: csr_new = fwd_csr;
    endcase
    ex_mem_d = '{valid: id_ex.valid, pc: id_ex.pc, pc4: id_ex.pc4, instr: id_ex.instr,
                 ctrl: id_ex.ctrl, funct3: id_ex.funct3, rd: id_ex.rd, imm: id_ex.imm,
                 alu_result: alu_result, store_data: fwd_rs2, csr_addr: id_ex.csr_addr,
                 csr_rdata: fwd_csr, csr_wdata: csr_new};
  end

  pipeline_register #(.T(ex_mem_t), .BUBBLE('0)) u_ex_mem (
    .clk, .rst, .en, .stall(1'b0), .flush(1'b0), .d(ex_mem_d), .q(ex_mem));

  // ---------------- MEM ----------------
  logic        mem_is_rom;
  logic [3:0]  byte_en;
  logic [31:0] bedm_wd, berf_wd, dm_rd, dmem_rdata;

  always_comb begin
    mem_is_rom = (ex_mem.alu_result[31:28] == 4'h0);
    rom_addr   = ex_mem.alu_result;
    dm_rd      = mem_is_rom ? rom_rdata : dmem_rdata;
  end

  be_logic u_be (
    .mem_write(ex_mem.valid && ex_mem.ctrl.mem_write && !mem_is_rom), .funct3(ex_mem.funct3),
    .addr_lo(ex_mem.alu_result[1:0]), .rd2(ex_mem.store_data), .dm_rd,
    .byte_en, .bedm_wd, .berf_wd);

  data_memory #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk, .en, .addr(ex_mem.alu_result), .byte_en, .wdata(bedm_wd), .rdata(dmem_rdata));

  always_comb begin
    unique case (ex_mem.ctrl.wb_sel)
      WB_DMEM: mem_wb_value = berf_wd;
      WB_CSR:  mem_wb_value = ex_mem.csr_rdata;
      WB_IMMU: mem_wb_value = ex_mem.imm;
      WB_PC4:  mem_wb_value = ex_mem.pc4;
      default: mem_wb_value = ex_mem.alu_result;
    endcase
    mem_wb_d = '{valid: ex_mem.valid, pc: ex_mem.pc, instr: ex_mem.instr, ctrl: ex_mem.ctrl,
                 rd: ex_mem.rd, wb_data: mem_wb_value, csr_addr: ex_mem.csr_addr,
                 csr_wdata: ex_mem.csr_wdata};
  end

  pipeline_register #(.T(mem_wb_t), .BUBBLE('0)) u_mem_wb (
    .clk, .rst, .en, .stall(1'b0), .flush(1'b0), .d(mem_wb_d), .q(mem_wb));

  // ---------------- hazard unit ----------------
  hazard_unit u_haz (
    .id_rs1, .id_rs2, .id_use_rs1, .id_use_rs2,
    .ex_valid(id_ex.valid), .ex_mem_read(id_ex.ctrl.mem_read), .ex_rd(id_ex.rd),
    .ex_rs1(id_ex.rs1), .ex_rs2(id_ex.rs2),
    .ex_csr_read(id_ex.valid && id_ex.ctrl.wb_sel == WB_CSR), .ex_csr_addr(id_ex.csr_addr),
    .mem_valid(ex_mem.valid), .mem_reg_write(ex_mem.ctrl.reg_write), .mem_rd(ex_mem.rd),
    .mem_csr_write(ex_mem.ctrl.csr_write), .mem_csr_addr(ex_mem.csr_addr),
    .wb_valid(mem_wb.valid), .wb_reg_write(mem_wb.ctrl.reg_write), .wb_rd(mem_wb.rd),
    .wb_csr_write(mem_wb.ctrl.csr_write), .wb_csr_addr(mem_wb.csr_addr),
    .ex_redirect, .trap_busy, .trapped,
    .hazard_mem, .hazard_wb, .csr_hazard_mem, .csr_hazard_wb, .load_use,
    .pc_stall, .if_id_stall, .if_id_flush, .id_ex_flush);

  // ---------------- debug outputs ----------------
  // dbg_reg_addr/dbg_reg_data hold the most recent register write.
  always_ff @(posedge clk) begin
    if (rst) begin
      dbg_reg_addr <= '0;
      dbg_reg_data <= '0;
    end else if (en && mem_wb.valid && mem_wb.ctrl.reg_write && mem_wb.rd != 5'd0) begin
      dbg_reg_addr <= mem_wb.rd;
      dbg_reg_data <= mem_wb.wb_data;
    end
  end

  always_comb begin
    dbg_pc          = mem_wb.pc;
    dbg_instruction = mem_wb.instr;
    dbg_retire      = mem_wb.valid;
    dbg_alu_result  = alu_result;
    dbg_mcycle      = mcycle;
    dbg_minstret    = minstret;
  end
endmodule
