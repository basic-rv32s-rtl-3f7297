// tb_rv32i46f_5sp: runs a hand-assembled program on the core and checks the
// architectural result: 28 registers and 4 data-memory words against values
// worked out from the program by hand, and the number of instructions
// retired before the final "jal x0, 0" (73). The clock enable is dropped on
// random cycles; the result must not change.
// The program exercises, and the testbench counts: forwarding from MEM and
// from WB, CSR forwarding from MEM and WB, the load-use stall, predicted-taken
// branches, mispredictions, JAL/JALR redirects, ECALL and EBREAK traps, MRET,
// loads from the instruction memory through the data-side bypass, byte and
// halfword accesses, and cycles with the clock enable low. A mechanism that
// never happens counts as a failure.
module tb_rv32i46f_5sp;
  import rv32_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 0, rst, en, prog_we;
  logic [31:0] prog_addr, prog_wdata, dbg_pc, dbg_instruction, dbg_reg_data, dbg_alu_result;
  logic [4:0]  dbg_reg_addr;
  logic        dbg_retire;
  logic [63:0] dbg_mcycle, dbg_minstret;
  int checks = 0, failures = 0;

  rv32i46f_5sp #(.IMEM_WORDS(256), .DMEM_WORDS(256)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] p [64];
  logic [31:0] exp_x [32];
  int n_fwd_mem, n_fwd_wb, n_csr_mem, n_csr_wb, n_load_use, n_pred_ok, n_miss, n_jump,
      n_trap, n_mret, n_rom, n_en_low;
  longint halt_instret, halt_cycle;
  bit halted = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    foreach (p[i]) p[i] = NOP();
    p[0]  = LUI(1, 32'h10000);     p[1]  = ADDI(2, 0, 5);       p[2]  = ADDI(3, 2, 7);
    p[3]  = ADD(4, 3, 2);          p[4]  = SUB(5, 4, 3);        p[5]  = SW(4, 1, 0);
    p[6]  = LW(6, 1, 0);           p[7]  = ADDI(7, 6, 1);       p[8]  = SB(7, 1, 5);
    p[9]  = LBU(8, 1, 5);          p[10] = ADDI(9, 0, -1);      p[11] = SH(9, 1, 8);
    p[12] = LH(10, 1, 8);          p[13] = LHU(11, 1, 8);       p[14] = ADDI(12, 0, 0);
    p[15] = ADDI(13, 0, 10);       p[16] = ADD(12, 12, 13);     p[17] = ADDI(13, 13, -1);
    p[18] = BNE(13, 0, -8);        p[19] = JAL(14, 8);          p[20] = ADDI(15, 0, 99);
    p[21] = AUIPC(16, 0);          p[22] = JALR(17, 16, 12);    p[23] = ADDI(15, 0, 98);
    p[24] = ADDI(18, 0, 192);      p[25] = CSRRW(0, 12'h305, 18); p[26] = CSRRS(19, 12'h305, 0);
    p[27] = ECALL();               p[28] = ADDI(23, 0, 7);      p[29] = CSRRWI(0, 12'h340, 21);
    p[30] = NOP();                 p[31] = CSRRS(24, 12'h340, 0); p[32] = LW(25, 0, 4);
    p[33] = EBREAK();              p[34] = SW(12, 1, 12);       p[35] = SRAI(26, 9, 4);
    p[36] = SLTU(28, 2, 9);        p[37] = BLT(9, 2, 8);        p[38] = ADDI(15, 0, 97);
    p[39] = BGEU(2, 9, 8);         p[40] = ADDI(29, 0, 1);      p[41] = HALT();
    // trap handler at 0xC0: count, skip the trapping instruction, return
    p[48] = CSRRS(21, 12'h342, 0); p[49] = CSRRS(22, 12'h341, 0); p[50] = ADDI(22, 22, 4);
    p[51] = CSRRW(0, 12'h341, 22); p[52] = ADDI(27, 27, 1);     p[53] = MRET();

    foreach (exp_x[i]) exp_x[i] = 0;
    exp_x[1] = 32'h1000_0000; exp_x[2] = 5; exp_x[3] = 12; exp_x[4] = 17; exp_x[5] = 5;
    exp_x[6] = 17; exp_x[7] = 18; exp_x[8] = 32'h12; exp_x[9] = 32'hFFFF_FFFF;
    exp_x[10] = 32'hFFFF_FFFF; exp_x[11] = 32'hFFFF; exp_x[12] = 55; exp_x[13] = 0;
    exp_x[14] = 80; exp_x[15] = 0; exp_x[16] = 84; exp_x[17] = 92; exp_x[18] = 192;
    exp_x[19] = 192; exp_x[21] = 3; exp_x[22] = 33 * 4 + 4; exp_x[23] = 7; exp_x[24] = 21;
    exp_x[25] = p[1]; exp_x[26] = 32'hFFFF_FFFF; exp_x[27] = 2; exp_x[28] = 1; exp_x[29] = 1;

    rst = 1; en = 0; prog_we = 0; prog_addr = 0; prog_wdata = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 64; i++) begin
      prog_we = 1; prog_addr = 4 * i; prog_wdata = p[i]; @(posedge clk); #1;
    end
    prog_we = 0;
    @(posedge clk); #1 rst = 0;
    while (!halted) begin
      en = $urandom_range(0, 9) != 0;
      @(posedge clk); #1;
    end
    en = 1; repeat (5) @(posedge clk); #1;

    for (int r = 1; r < 30; r++)
      if (r != 20) chk(dut.u_rf.regs[r] == exp_x[r], $sformatf("x%0d = %h, expected %h", r, dut.u_rf.regs[r], exp_x[r]));
    chk(dut.u_dmem.mem[0] == 17,           "dmem[0]");
    chk(dut.u_dmem.mem[1] == 32'h0000_1200, "dmem[1]");
    chk(dut.u_dmem.mem[2] == 32'h0000_FFFF, "dmem[2]");
    chk(dut.u_dmem.mem[3] == 55,           "dmem[3]");
    chk(halt_instret == 73, $sformatf("instructions retired %0d, expected 73", halt_instret));
    chk(halt_cycle > 73 && halt_cycle < 200, $sformatf("cycles %0d", halt_cycle));
    $display("cycles %0d instructions %0d", halt_cycle, halt_instret);
    $display("fwd_mem %0d fwd_wb %0d csr_mem %0d csr_wb %0d load_use %0d pred_ok %0d mispredict %0d jump %0d trap %0d mret %0d rom %0d en_low %0d",
             n_fwd_mem, n_fwd_wb, n_csr_mem, n_csr_wb, n_load_use, n_pred_ok, n_miss, n_jump, n_trap, n_mret, n_rom, n_en_low);
    chk(n_fwd_mem > 0, "forward from MEM never happened");
    chk(n_fwd_wb > 0, "forward from WB never happened");
    chk(n_csr_mem > 0, "CSR forward from MEM never happened");
    chk(n_csr_wb > 0, "CSR forward from WB never happened");
    chk(n_load_use > 0, "load-use stall never happened");
    chk(n_pred_ok > 0, "correct taken prediction never happened");
    chk(n_miss > 0, "misprediction never happened");
    chk(n_jump > 0, "jump never happened");
    chk(n_trap == 2, $sformatf("traps taken %0d, expected 2", n_trap));
    chk(n_mret == 2, $sformatf("mret taken %0d, expected 2", n_mret));
    chk(n_rom > 0, "instruction-memory bypass load never happened");
    chk(n_en_low > 0, "clock enable never low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!rst && prog_we == 0) begin
    if (!en) n_en_low++;
    else begin
      if (|dut.hazard_mem && dut.id_ex.valid) n_fwd_mem++;
      if (|dut.hazard_wb && dut.id_ex.valid) n_fwd_wb++;
      if (dut.csr_hazard_mem) n_csr_mem++;
      if (dut.csr_hazard_wb) n_csr_wb++;
      if (dut.load_use && !dut.ex_redirect) n_load_use++;
      if (dut.b_taken && !dut.bp_miss) n_pred_ok++;
      if (dut.bp_miss) n_miss++;
      if (dut.id_ex.valid && dut.id_ex.ctrl.jump) n_jump++;
      if (dut.trapped && dut.u_trap.kind != TRAP_MRET) n_trap++;
      if (dut.trapped && dut.u_trap.kind == TRAP_MRET) n_mret++;
      if (dut.ex_mem.valid && dut.ex_mem.ctrl.mem_read && dut.mem_is_rom) n_rom++;
      if (dbg_retire && dbg_instruction == HALT() && !halted) begin
        halted = 1; halt_instret = longint'(dbg_minstret); halt_cycle = longint'(dbg_mcycle);
      end
    end
  end
endmodule
