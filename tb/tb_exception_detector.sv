// tb_exception_detector: the three system instructions, CSR instructions,
// every legal opcode and random illegal words, with and without valid.
module tb_exception_detector;
  import rv32_pkg::*;
  logic valid; logic [31:0] instr; trap_kind_e trap_kind, exp;
  int checks = 0, failures = 0;
  logic [6:0] legal [10] = '{OP_LUI, OP_AUIPC, OP_JAL, OP_JALR, OP_BRANCH, OP_LOAD, OP_STORE, OP_IMM, OP_OP, OP_FENCE};
  exception_detector dut (.*);
  task automatic t(input logic v, input logic [31:0] w, input trap_kind_e e);
    valid = v; instr = w; #1;
    checks++; if (trap_kind !== (v ? e : TRAP_NONE)) begin failures++; $display("instr %h got %s exp %s", w, trap_kind.name(), e.name()); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = 0; v < 2; v++) begin
      t(v, 32'h0000_0073, TRAP_ECALL);
      t(v, 32'h0010_0073, TRAP_EBREAK);
      t(v, 32'h3020_0073, TRAP_MRET);
      t(v, 32'h1050_0073, TRAP_ILLEGAL);   // wfi: not supported
      t(v, 32'h3410_2573, TRAP_NONE);      // csrrs a0, mepc, x0
      t(v, 32'h3057_d073, TRAP_NONE);      // csrrwi mtvec
      t(v, 32'h0000_4073, TRAP_ILLEGAL);   // SYSTEM funct3=100
    end
    for (int i = 0; i < 300; i++) begin
      logic [31:0] w; w = $urandom;
      if (i % 2 == 0) begin w[6:0] = legal[$urandom_range(0, 9)]; t(1, w, TRAP_NONE); end
      else begin
        w[6:0] = 7'($urandom);
        exp = TRAP_ILLEGAL;
        foreach (legal[k]) if (w[6:0] == legal[k]) exp = TRAP_NONE;
        if (w[6:0] == OP_SYSTEM) continue;
        t(1, w, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
