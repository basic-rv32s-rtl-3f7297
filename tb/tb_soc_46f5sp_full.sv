// tb_soc_46f5sp_full: the end-to-end SoC test with every SoC parameter at its
// default (10 ms debounce, 115,200 baud at 50 MHz, 16 KiB memories). Same
// sequence and checks as tb_soc_46f5sp, which runs it with short debounce
// and bit times. A UART receiver in the testbench decodes the serial line.
// Sequence: load a program (the core test program with its trap handler),
// release reset, single-step the core three times with the up button
// (mcycle must advance by exactly one per press), start the benchmark with
// the center button, wait for it to finish, then print the result (left),
// the last register write (down) and the retiring PC/instruction (right).
// The printed counts are compared with the 73 instructions the program
// retires and with the mcycle difference the testbench observes itself;
// the register line must show x29 = 1, the program's last register write.
// Every mechanism of the core (forwarding, stalls, prediction, traps, the
// instruction-memory bypass) and of the SoC (stepping, benchmark run, the
// three messages) is counted and must occur.
module tb_soc_46f5sp_full;
  import rv_asm_pkg::*;
  import rv32_pkg::*;
  localparam int DB  = 500_000;  // debounce cycles (the SoC default)
  localparam int CPB = 434;      // clocks per UART bit (the SoC default)

  logic clk = 0, reset_n, btn_up, btn_center, btn_down, btn_left, btn_right, prog_we, uart_txd;
  logic [31:0] prog_addr, prog_wdata;
  logic [7:0] led;
  int checks = 0, failures = 0;

  soc_46f5sp dut (.*);
  always #5 clk = ~clk;

  logic [31:0] p [64];
  string rx = "";
  longint m0, i0, m1, i1;
  bit halt_seen = 0, running_seen = 0;
  int n_fwd_mem, n_fwd_wb, n_csr_mem, n_csr_wb, n_load_use, n_pred_ok, n_miss, n_jump,
      n_trap, n_mret, n_rom, n_steps, n_bench;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // UART receiver: 8N1, samples in the middle of each bit
  initial forever begin
    logic [7:0] b;
    @(negedge uart_txd);
    repeat (CPB / 2) @(posedge clk);
    if (uart_txd == 0) begin
      for (int k = 0; k < 8; k++) begin repeat (CPB) @(posedge clk); b[k] = uart_txd; end
      repeat (CPB) @(posedge clk);
      if (uart_txd != 1) begin failures++; $display("UART framing error"); end
      rx = {rx, string'(b)};
    end
  end

  function automatic string up(input string s); return s.toupper(); endfunction

  task automatic press(ref logic btn);
    btn = 1; repeat (DB + 10) @(posedge clk); btn = 0; repeat (DB + 10) @(posedge clk);
  endtask

  task automatic wait_text(input int n);
    int guard = 0;
    while (rx.len() < n && guard < 20 * CPB * (n + 2)) begin @(posedge clk); guard++; end
    repeat (2 * CPB) @(posedge clk);
  endtask

  initial begin
    repeat (4 * DB * 10 + 400 * CPB + 50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    string exp;
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
    p[48] = CSRRS(21, 12'h342, 0); p[49] = CSRRS(22, 12'h341, 0); p[50] = ADDI(22, 22, 4);
    p[51] = CSRRW(0, 12'h341, 22); p[52] = ADDI(27, 27, 1);     p[53] = MRET();

    reset_n = 0; {btn_up, btn_center, btn_down, btn_left, btn_right} = '0;
    prog_we = 0; prog_addr = 0; prog_wdata = 0;
    repeat (4) @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      @(negedge clk) prog_we = 1; prog_addr = 4 * i; prog_wdata = p[i];
    end
    @(negedge clk) prog_we = 0;
    repeat (4) @(posedge clk); reset_n = 1; repeat (4) @(posedge clk);
    chk(dut.u_core.dbg_mcycle == 0, "core idle after reset");

    // single stepping
    for (int s = 1; s <= 3; s++) begin
      press(btn_up);
      chk(dut.u_core.dbg_mcycle == 64'(s), $sformatf("after %0d steps mcycle = %0d", s, dut.u_core.dbg_mcycle));
    end

    // benchmark run
    press(btn_center);
    while (!led[1]) @(posedge clk);
    repeat (4) @(posedge clk);
    chk(halt_seen, "halt retired");
    chk(i1 - i0 == 73, $sformatf("instructions in benchmark %0d, expected 73", i1 - i0));
    chk(led[1:0] == 2'b10, "LEDs show done, not running");

    press(btn_left);
    exp = {up($sformatf("%016h", m1 - m0)), "\r\nInstr: ", up($sformatf("%016h", i1 - i0)), "\r\n"};
    wait_text(exp.len());
    chk(rx == exp, $sformatf("result text \"%s\" expected \"%s\"", rx, exp));
    $display("benchmark: %0d cycles, %0d instructions (m0 %0d i0 %0d m1 %0d i1 %0d)", m1 - m0, i1 - i0, m0, i0, m1, i1);

    rx = "";
    press(btn_down);
    exp = "x1D: 00000001\r\n";
    wait_text(exp.len());
    chk(rx == exp, $sformatf("register text \"%s\" expected \"%s\"", rx, exp));

    rx = "";
    exp = {"PC: ", up($sformatf("%08h", dut.u_core.dbg_pc)), " Instr: ", up($sformatf("%08h", dut.u_core.dbg_instruction)), "\r\n"};
    press(btn_right);
    wait_text(exp.len());
    chk(rx == exp, $sformatf("pc text \"%s\" expected \"%s\"", rx, exp));

    $display("steps %0d bench %0d fwd_mem %0d fwd_wb %0d csr_mem %0d csr_wb %0d load_use %0d pred_ok %0d mispredict %0d jump %0d trap %0d mret %0d rom %0d",
             n_steps, n_bench, n_fwd_mem, n_fwd_wb, n_csr_mem, n_csr_wb, n_load_use, n_pred_ok, n_miss, n_jump, n_trap, n_mret, n_rom);
    chk(n_steps == 3, "three single steps");
    chk(n_bench == 1, "one benchmark run");
    chk(n_fwd_mem > 0 && n_fwd_wb > 0, "GPR forwarding from MEM and WB");
    chk(n_csr_mem > 0 && n_csr_wb > 0, "CSR forwarding from MEM and WB");
    chk(n_load_use > 0, "load-use stall");
    chk(n_pred_ok > 0 && n_miss > 0, "correct prediction and misprediction");
    chk(n_jump > 0, "jumps");
    chk(n_trap == 2 && n_mret == 2, "two traps and two returns");
    chk(n_rom > 0, "instruction-memory bypass load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // observers
  always @(posedge clk) begin
    if (dut.u_btn.step_pulse) n_steps++;
    if (reset_n && !dut.rst && dut.bench_running && !running_seen) begin
      running_seen = 1; n_bench++;
      m0 = longint'(dut.u_core.dbg_mcycle); i0 = longint'(dut.u_core.dbg_minstret);
    end
    if (dut.core_en) begin
      if (|dut.u_core.hazard_mem && dut.u_core.id_ex.valid) n_fwd_mem++;
      if (|dut.u_core.hazard_wb && dut.u_core.id_ex.valid) n_fwd_wb++;
      if (dut.u_core.csr_hazard_mem) n_csr_mem++;
      if (dut.u_core.csr_hazard_wb) n_csr_wb++;
      if (dut.u_core.load_use && !dut.u_core.ex_redirect) n_load_use++;
      if (dut.u_core.b_taken && !dut.u_core.bp_miss) n_pred_ok++;
      if (dut.u_core.bp_miss) n_miss++;
      if (dut.u_core.id_ex.valid && dut.u_core.id_ex.ctrl.jump) n_jump++;
      if (dut.u_core.trapped && dut.u_core.u_trap.kind != TRAP_MRET) n_trap++;
      if (dut.u_core.trapped && dut.u_core.u_trap.kind == TRAP_MRET) n_mret++;
      if (dut.u_core.ex_mem.valid && dut.u_core.ex_mem.ctrl.mem_read && dut.u_core.mem_is_rom) n_rom++;
      if (running_seen && !halt_seen && dut.u_core.dbg_retire && dut.u_core.dbg_instruction == HALT()) begin
        halt_seen = 1;
        m1 = longint'(dut.u_core.dbg_mcycle); i1 = longint'(dut.u_core.dbg_minstret);
      end
    end
  end
endmodule
