// tb_core_random: random-program test of the core against an instruction-set
// model. Several programs of random RV32I/Zicsr instructions are generated.
// Each is loaded through the program port and run with the clock enable
// dropped on random cycles. After the final "jal x0, 0" retires, all 31
// registers, the 16 data-memory words the program can touch and the
// retired-instruction count are compared with a plain sequential
// interpreter of the same program, written here in the testbench.
//
// The generator draws most source registers from the last few destination
// registers, so back-to-back dependences are common. That exercises MEM and
// WB forwarding, the load-use stall and CSR forwarding through mscratch.
// Branches and jumps only go forward (JALR to an absolute address), which
// keeps every program finite. Their outcomes are data dependent, so the global predictor is right on
// some and wrong on others. Loads with x0 as base read the instruction
// memory through the data-side bypass. A prologue clears the data words and
// mscratch, so the model and the core start from the same state.
// ECALL, EBREAK and illegal words (all-zeros, all-ones) are mixed in. A
// handler placed after the halt reads mcause and mepc, steps mepc past the
// trapping instruction and returns with MRET. The model takes the trap the
// same way: the trapping instruction and MRET do not count as retired. Reads
// of mepc and mcause in the main code check the trap writes.
module tb_core_random;
  import rv32_pkg::*;
  import rv_asm_pkg::*;

  localparam int PROGS = 8;
  localparam int LEN   = 320;        // instructions per program, halt included
  localparam int IMEM  = 512;

  logic clk = 0, rst, en, prog_we;
  logic [31:0] prog_addr, prog_wdata, dbg_pc, dbg_instruction, dbg_reg_data, dbg_alu_result;
  logic [4:0]  dbg_reg_addr;
  logic        dbg_retire;
  logic [63:0] dbg_mcycle, dbg_minstret;
  int checks = 0, failures = 0;

  rv32i46f_5sp #(.IMEM_WORDS(IMEM), .DMEM_WORDS(64)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] p [IMEM];
  int n_fwd_mem, n_fwd_wb, n_csr_fwd, n_load_use, n_miss, n_pred_ok, n_rom, n_trap, m_trap_total;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- program generator ----------------
  int recent [4];
  function automatic int pick_rs();
    if ($urandom_range(0, 9) < 6) return recent[$urandom_range(0, 3)];
    return $urandom_range(0, 31);
  endfunction
  function automatic int pick_rd();
    int r;
    if ($urandom_range(0, 19) == 0) return 0;       // writes to x0 must vanish
    r = $urandom_range(2, 31);                       // x1 holds the data base
    recent[3] = recent[2]; recent[2] = recent[1]; recent[1] = recent[0]; recent[0] = r;
    return r;
  endfunction

  function automatic void gen_program();
    int i, last;
    foreach (p[k]) p[k] = NOP();
    foreach (recent[k]) recent[k] = 2 + k;
    p[0] = LUI(1, 32'h10000);
    for (int w = 0; w < 16; w++) p[1 + w] = SW(0, 1, 4 * w);
    p[17] = CSRRWI(0, 12'h340, 0);
    p[18] = ADDI(2, 0, 4 * LEN);
    p[19] = CSRRW(0, 12'h305, 2);
    // handler after the halt: record mcause, step mepc past the trapping instruction
    p[LEN]     = CSRRS(29, 12'h342, 0);
    p[LEN + 1] = CSRRS(30, 12'h341, 0);
    p[LEN + 2] = ADDI(30, 30, 4);
    p[LEN + 3] = CSRRW(0, 12'h341, 30);
    p[LEN + 4] = MRET();
    i = 20; last = LEN - 1;
    while (i < last - 4) begin
      int kind; kind = $urandom_range(0, 99);
      if (kind < 25) begin                                    // register-register
        logic [2:0] f3; logic [6:0] f7; f3 = 3'($urandom_range(0, 7));
        f7 = ((f3 == 3'd0 || f3 == 3'd5) && $urandom_range(0, 1)) ? 7'h20 : 7'h00;
        p[i] = enc_r(f7, pick_rs(), pick_rs(), f3, pick_rd(), 7'b0110011);
      end else if (kind < 45) begin                           // register-immediate
        logic [2:0] f3; int imm; f3 = 3'($urandom_range(0, 7));
        imm = $urandom_range(0, 4095) - 2048;
        if (f3 == 3'd1) imm = $urandom_range(0, 31);
        if (f3 == 3'd5) imm = $urandom_range(0, 31) | ($urandom_range(0, 1) ? 32'h400 : 0);
        p[i] = enc_i(imm, pick_rs(), f3, pick_rd(), 7'b0010011);
      end else if (kind < 50) begin
        p[i] = $urandom_range(0, 1) ? LUI(pick_rd(), $urandom) : AUIPC(pick_rd(), $urandom_range(0, 15));
      end else if (kind < 62) begin                           // store to the data memory
        int sz; sz = $urandom_range(0, 2);
        case (sz)
          0: p[i] = SB(pick_rs(), 1, $urandom_range(0, 63));
          1: p[i] = SH(pick_rs(), 1, 2 * $urandom_range(0, 31));
          default: p[i] = SW(pick_rs(), 1, 4 * $urandom_range(0, 15));
        endcase
      end else if (kind < 76) begin                           // load from the data memory
        int f; f = $urandom_range(0, 4);
        case (f)
          0: p[i] = LB(pick_rd(), 1, $urandom_range(0, 63));
          1: p[i] = LBU(pick_rd(), 1, $urandom_range(0, 63));
          2: p[i] = LH(pick_rd(), 1, 2 * $urandom_range(0, 31));
          3: p[i] = LHU(pick_rd(), 1, 2 * $urandom_range(0, 31));
          default: p[i] = LW(pick_rd(), 1, 4 * $urandom_range(0, 15));
        endcase
      end else if (kind < 79) begin                           // load from the instruction memory
        p[i] = $urandom_range(0, 1) ? LW(pick_rd(), 0, 4 * $urandom_range(0, LEN - 1))
                                    : LBU(pick_rd(), 0, $urandom_range(0, 4 * LEN - 1));
      end else if (kind < 91) begin                           // forward branch over 1..3 instructions
        logic [2:0] f3; f3 = 3'($urandom_range(0, 5)); if (f3 >= 3'd2) f3 += 3'd2;
        p[i] = enc_b(4 * $urandom_range(2, 4), pick_rs(), pick_rs(), f3);
      end else if (kind < 93) begin
        p[i] = JAL(pick_rd(), 4 * $urandom_range(1, 3));
      end else if (kind < 94) begin                           // JALR over one instruction
        // absolute target from x0, so a branch landing here cannot send it astray;
        // bit 0 of the target is cleared
        p[i] = JALR(pick_rd(), 0, 4 * (i + 2) + $urandom_range(0, 1));
      end else if (kind < 96) begin                           // trap: ECALL, EBREAK or illegal
        int t; t = $urandom_range(0, 3);
        p[i] = (t == 0) ? ECALL() : (t == 1) ? EBREAK() : (t == 2) ? 32'h0000_0000 : 32'hFFFF_FFFF;
      end else begin                                          // CSR access
        int op; op = $urandom_range(0, 4);
        case (op)
          0: p[i] = CSRRW(pick_rd(), 12'h340, pick_rs());
          1: p[i] = CSRRS(pick_rd(), 12'h340, pick_rs());
          2: p[i] = CSRRC(pick_rd(), 12'h340, pick_rs());
          3: p[i] = CSRRWI(pick_rd(), 12'h340, $urandom_range(0, 31));
          default: p[i] = CSRRS(pick_rd(), $urandom_range(0, 1) ? 12'h342 : 12'h341, 0);
        endcase
        if ($urandom_range(0, 1)) begin                       // read back at once or one later
          if ($urandom_range(0, 1)) begin i++; p[i] = ADDI(pick_rd(), pick_rs(), 1); end
          i++; p[i] = CSRRS(pick_rd(), 12'h340, 0);
        end
      end
      i++;
    end
    p[last - 1] = CSRRS(31, 12'h340, 0);
    p[last] = HALT();
  endfunction

  // ---------------- reference interpreter ----------------
  logic [31:0] mx [32];
  logic [7:0]  mdm [64];
  logic [31:0] mscr, mtvec, mepc, mcause;
  int          m_retired, m_traps;

  function automatic logic [31:0] sx(input logic [31:0] v, input int bits);
    return 32'($signed(v << (32 - bits)) >>> (32 - bits));
  endfunction

  function automatic logic [7:0] rd_byte(input logic [31:0] a);
    if (a[31:28] == 4'h0) return p[(a >> 2) % IMEM][8 * a[1:0] +: 8];
    return mdm[a[5:0]];
  endfunction

  function automatic void model_run();
    logic [31:0] pc, ins, a, b, r, imm_i, imm_s, imm_b, imm_j, nxt;
    logic [4:0] rd, rs1, rs2; logic [2:0] f3;
    bit trap, retires; logic [31:0] cause;
    foreach (mx[k]) mx[k] = 0;
    foreach (mdm[k]) mdm[k] = 8'h00;
    mscr = 0; mtvec = 0; mepc = 0; mcause = 0; m_retired = 0; m_traps = 0; pc = 0;
    forever begin
      ins = p[pc >> 2];
      if (ins == HALT()) break;
      rd = ins[11:7]; rs1 = ins[19:15]; rs2 = ins[24:20]; f3 = ins[14:12];
      a = mx[rs1]; b = mx[rs2];
      imm_i = sx(32'(ins[31:20]), 12);
      imm_s = sx(32'({ins[31:25], ins[11:7]}), 12);
      imm_b = sx(32'({ins[31], ins[7], ins[30:25], ins[11:8], 1'b0}), 13);
      imm_j = sx(32'({ins[31], ins[19:12], ins[20], ins[30:21], 1'b0}), 21);
      nxt = pc + 4; r = 0; trap = 0; retires = 1; cause = 0;
      case (ins[6:0])
        7'b0110011: begin
          case (f3)
            3'd0: r = ins[30] ? a - b : a + b;
            3'd1: r = a << b[4:0];
            3'd2: r = 32'($signed(a) < $signed(b));
            3'd3: r = 32'(a < b);
            3'd4: r = a ^ b;
            3'd5: r = ins[30] ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
            3'd6: r = a | b;
            default: r = a & b;
          endcase
          if (rd != 0) mx[rd] = r;
        end
        7'b0010011: begin
          case (f3)
            3'd0: r = a + imm_i;
            3'd1: r = a << ins[24:20];
            3'd2: r = 32'($signed(a) < $signed(imm_i));
            3'd3: r = 32'(a < imm_i);
            3'd4: r = a ^ imm_i;
            3'd5: r = ins[30] ? 32'($signed(a) >>> ins[24:20]) : a >> ins[24:20];
            3'd6: r = a | imm_i;
            default: r = a & imm_i;
          endcase
          if (rd != 0) mx[rd] = r;
        end
        7'b0110111: if (rd != 0) mx[rd] = {ins[31:12], 12'b0};
        7'b0010111: if (rd != 0) mx[rd] = pc + {ins[31:12], 12'b0};
        7'b0000011: begin
          logic [31:0] ad; ad = a + imm_i;
          case (f3)
            3'd0: r = sx(32'(rd_byte(ad)), 8);
            3'd4: r = 32'(rd_byte(ad));
            3'd1: r = sx(32'({rd_byte(ad + 1), rd_byte(ad)}), 16);
            3'd5: r = 32'({rd_byte(ad + 1), rd_byte(ad)});
            default: r = {rd_byte(ad + 3), rd_byte(ad + 2), rd_byte(ad + 1), rd_byte(ad)};
          endcase
          if (rd != 0) mx[rd] = r;
        end
        7'b0100011: begin
          logic [31:0] ad; ad = a + imm_s;
          mdm[ad[5:0]] = b[7:0];
          if (f3 >= 3'd1) mdm[6'(ad + 1)] = b[15:8];
          if (f3 == 3'd2) begin mdm[6'(ad + 2)] = b[23:16]; mdm[6'(ad + 3)] = b[31:24]; end
        end
        7'b1100011: begin
          bit t;
          case (f3)
            3'd0: t = a == b;
            3'd1: t = a != b;
            3'd4: t = $signed(a) < $signed(b);
            3'd5: t = $signed(a) >= $signed(b);
            3'd6: t = a < b;
            default: t = a >= b;
          endcase
          if (t) nxt = pc + imm_b;
        end
        7'b1101111: begin if (rd != 0) mx[rd] = pc + 4; nxt = pc + imm_j; end
        7'b1100111: begin if (rd != 0) mx[rd] = pc + 4; nxt = (a + imm_i) & ~32'd1; end
        7'b1110011: begin
          if (f3 == 3'd0) begin
            if (ins == MRET()) begin nxt = mepc; retires = 0; end
            else begin trap = 1; cause = (ins == ECALL()) ? 11 : (ins == EBREAK()) ? 3 : 2; end
          end else begin
            logic [31:0] old, src, nv; logic [11:0] ca;
            ca = ins[31:20]; src = f3[2] ? 32'(rs1) : a;
            case (ca)
              12'h305: old = mtvec;
              12'h340: old = mscr;
              12'h341: old = mepc;
              default: old = mcause;
            endcase
            case (f3[1:0])
              2'd1: nv = src;
              2'd2: nv = old | src;
              default: nv = old & ~src;
            endcase
            if (f3[1:0] == 2'd1 || rs1 != 0)
              case (ca)
                12'h305: mtvec = nv;
                12'h340: mscr = nv;
                12'h341: mepc = nv;
                default: mcause = nv;
              endcase
            if (rd != 0) mx[rd] = old;
          end
        end
        7'b0001111: ;                                         // FENCE
        default: begin trap = 1; cause = 2; end
      endcase
      if (trap) begin
        mepc = pc; mcause = cause; nxt = mtvec; retires = 0; m_traps++;
      end
      if (retires) m_retired++;
      pc = nxt;
    end
  endfunction

  // ---------------- run ----------------
  bit halted;
  longint halt_instret, total_cycles, total_instr;

  always @(posedge clk) if (!rst && !prog_we && en) begin
    if (|dut.hazard_mem && dut.id_ex.valid) n_fwd_mem++;
    if (|dut.hazard_wb && dut.id_ex.valid) n_fwd_wb++;
    if (dut.csr_hazard_mem || dut.csr_hazard_wb) n_csr_fwd++;
    if (dut.load_use && !dut.ex_redirect) n_load_use++;
    if (dut.bp_miss) n_miss++;
    if (dut.trapped && dut.u_trap.kind != TRAP_MRET) n_trap++;
    if (dut.b_taken && !dut.bp_miss) n_pred_ok++;
    if (dut.ex_mem.valid && dut.ex_mem.ctrl.mem_read && dut.mem_is_rom) n_rom++;
    if (dbg_retire && dbg_instruction == HALT() && !halted) begin
      halted = 1; halt_instret = longint'(dbg_minstret);
      total_cycles += longint'(dbg_mcycle); total_instr += halt_instret;
    end
  end

  initial begin
    for (int prog = 0; prog < PROGS; prog++) begin
      gen_program();
      model_run();
      rst = 1; en = 0; prog_we = 0; prog_addr = 0; prog_wdata = 0; halted = 0;
      @(posedge clk); #1;
      for (int k = 0; k < LEN + 5; k++) begin
        prog_we = 1; prog_addr = 4 * k; prog_wdata = p[k]; @(posedge clk); #1;
      end
      prog_we = 0;
      @(posedge clk); #1 rst = 0;
      while (!halted) begin
        en = $urandom_range(0, 7) != 0;
        @(posedge clk); #1;
      end
      en = 1; repeat (5) @(posedge clk); #1 en = 0;
      for (int r = 1; r < 32; r++)
        chk(dut.u_rf.regs[r] == mx[r],
            $sformatf("program %0d: x%0d = %h, model %h", prog, r, dut.u_rf.regs[r], mx[r]));
      for (int w = 0; w < 16; w++)
        chk(dut.u_dmem.mem[w] == {mdm[4 * w + 3], mdm[4 * w + 2], mdm[4 * w + 1], mdm[4 * w]},
            $sformatf("program %0d: dmem[%0d] = %h", prog, w, dut.u_dmem.mem[w]));
      m_trap_total += m_traps;
      chk(halt_instret == longint'(m_retired),
          $sformatf("program %0d: retired %0d, model %0d", prog, halt_instret, m_retired));
    end
    $display("%0d programs: %0d instructions in %0d cycles", PROGS, total_instr, total_cycles);
    $display("fwd_mem %0d fwd_wb %0d csr_fwd %0d load_use %0d pred_ok %0d mispredict %0d rom %0d trap %0d",
             n_fwd_mem, n_fwd_wb, n_csr_fwd, n_load_use, n_pred_ok, n_miss, n_rom, n_trap);
    chk(n_trap == m_trap_total, $sformatf("traps taken %0d, model %0d", n_trap, m_trap_total));
    chk(n_fwd_mem > 0 && n_fwd_wb > 0 && n_csr_fwd > 0 && n_load_use > 0 && n_pred_ok > 0
        && n_miss > 0 && n_rom > 0 && n_trap > 0, "some mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
