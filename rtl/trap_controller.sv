// trap_controller: finite-state machine that takes traps and returns from
// them (Trap Controller).
// When the exception detector reports a trap for the instruction in ID
// (trap_kind != NONE, already masked when EX is redirecting), the FSM holds
// IF and ID (busy) while the older instructions in EX, MEM and WB drain
// (states DRAIN1, DRAIN2). For ECALL/EBREAK/illegal it then writes mepc with
// the trapping PC (W_MEPC) and mcause with the cause (W_MCAUSE) through its
// own CSR write port, and in REDIRECT raises trapped with t_target = mtvec.
// For MRET it goes straight to REDIRECT with t_target = mepc. In REDIRECT
// the PC controller loads t_target and the hazard unit flushes IF/ID;
// trap_done pulses. Cycle count from detection to redirect: 6 cycles for a
// trap, 4 for MRET (detect, 2 drain, [2 writes], redirect).
// The paper gives the block, its MRET/ECALL/EBREAK role and the signals
// Trap_Status, Trap_Done, T_Target and the CSR trap write port; it also
// mentions an FSM redesign used to break a combinational loop. The drain
// states and the cycle counts are this design's choice. mstatus is not
// updated (the paper leaves full privileged-spec trap handling to future
// work).
module trap_controller
  import rv32_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  trap_kind_e  trap_kind,
  input  logic [31:0] pc,
  input  logic [31:0] mtvec,
  input  logic [31:0] mepc,
  output logic        busy,
  output logic        trapped,
  output logic [31:0] t_target,
  output logic        trap_done,
  output logic        csr_t_we,
  output logic [11:0] csr_t_wa,
  output logic [31:0] csr_t_wd
);
  typedef enum logic [2:0] {IDLE, DRAIN1, DRAIN2, W_MEPC, W_MCAUSE, REDIRECT} state_e;
  state_e      state;
  trap_kind_e  kind;
  logic [31:0] trap_pc;
  logic [31:0] cause;

  always_comb begin
    unique case (kind)
      TRAP_ECALL:  cause = CAUSE_ECALL_M;
      TRAP_EBREAK: cause = CAUSE_BREAK;
      default:     cause = CAUSE_ILLEGAL;
    endcase
    busy      = (state != IDLE) || (trap_kind != TRAP_NONE);
    trapped   = (state == REDIRECT);
    trap_done = trapped;
    t_target  = (kind == TRAP_MRET) ? mepc : mtvec;
    csr_t_we  = (state == W_MEPC) || (state == W_MCAUSE);
    csr_t_wa  = (state == W_MEPC) ? CSR_MEPC : CSR_MCAUSE;
    csr_t_wd  = (state == W_MEPC) ? trap_pc : cause;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IDLE;
      kind    <= TRAP_NONE;
      trap_pc <= '0;
    end else if (en) begin
      unique case (state)
        IDLE:     if (trap_kind != TRAP_NONE) begin
                    kind    <= trap_kind;
                    trap_pc <= pc;
                    state   <= DRAIN1;
                  end
        DRAIN1:   state <= DRAIN2;
        DRAIN2:   state <= (kind == TRAP_MRET) ? REDIRECT : W_MEPC;
        W_MEPC:   state <= W_MCAUSE;
        W_MCAUSE: state <= REDIRECT;
        REDIRECT: state <= IDLE;
        default:  state <= IDLE;
      endcase
    end
  end
endmodule
