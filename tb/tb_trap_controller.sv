// tb_trap_controller: an ECALL, an EBREAK, an illegal instruction and an
// MRET; checks the CSR writes (mepc, then mcause), the redirect target, and
// the cycle count from detection to redirect (6 for a trap, 4 for MRET),
// and that busy is high throughout. The request is held like the ID stage
// holds the instruction, and dropped after the redirect.
module tb_trap_controller;
  import rv32_pkg::*;
  logic clk = 0, rst, en, busy, trapped, trap_done, csr_t_we;
  trap_kind_e trap_kind;
  logic [31:0] pc, mtvec, mepc, t_target, csr_t_wd; logic [11:0] csr_t_wa;
  int checks = 0, failures = 0;

  trap_controller dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input trap_kind_e k, input logic [31:0] p, input logic [31:0] cause);
    int cyc; bit saw_mepc, saw_cause;
    trap_kind = k; pc = p; cyc = 0; saw_mepc = 0; saw_cause = 0;
    #1 chk(busy, "busy on detect");
    while (!trapped) begin
      if (csr_t_we && csr_t_wa == CSR_MEPC)   begin saw_mepc = 1; chk(csr_t_wd == p, "mepc data"); end
      if (csr_t_we && csr_t_wa == CSR_MCAUSE) begin saw_cause = 1; chk(saw_mepc, "mepc before mcause"); chk(csr_t_wd == cause, "mcause data"); end
      chk(busy, "busy while trapping");
      @(posedge clk); #1 cyc++;
      if (cyc > 20) break;
    end
    chk(trapped && trap_done, "redirect");
    if (k == TRAP_MRET) begin
      chk(cyc == 3 && !saw_mepc && !saw_cause, $sformatf("mret latency %0d", cyc + 1));
      chk(t_target == mepc, "mret target");
    end else begin
      chk(cyc == 5 && saw_mepc && saw_cause, $sformatf("trap latency %0d", cyc + 1));
      chk(t_target == mtvec, "trap target");
    end
    @(posedge clk); #1 trap_kind = TRAP_NONE; #1
    chk(!busy && !trapped, "idle after redirect");
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 1; trap_kind = TRAP_NONE; pc = 0; mtvec = 32'h0000_0100; mepc = 32'h0000_0ABC;
    @(posedge clk); #1 rst = 0;
    chk(!busy && !trapped && !csr_t_we, "idle after reset");
    run(TRAP_ECALL,   32'h0000_0040, CAUSE_ECALL_M);
    run(TRAP_EBREAK,  32'h0000_0080, CAUSE_BREAK);
    run(TRAP_ILLEGAL, 32'h0000_00C4, CAUSE_ILLEGAL);
    run(TRAP_MRET,    32'h0000_0120, 0);
    // clock enable low freezes the FSM
    trap_kind = TRAP_ECALL; en = 0;
    repeat (10) @(posedge clk); #1
    chk(!trapped && !csr_t_we, "frozen with en low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
