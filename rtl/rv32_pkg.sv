// rv32_pkg: types and constants shared by the RV32I46F_5SP core.
// Holds the RV32I opcode constants (from the RISC-V base ISA), the control
// encodings of this core (ALUOp, ALU operation, write-back source, trap kind)
// and the structs carried by the four pipeline registers (IF/ID, ID/EX,
// EX/MEM, MEM/WB). The write-back source codes 001 (data memory),
// 100 (U-type immediate) and 101 (PC+4) follow the write-back multiplexer
// drawn in the core's block diagram; 010 (ALU result) and 011 (CSR read data)
// are this design's choice for the codes that could not be read there.
package rv32_pkg;

  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_OP     = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  localparam logic [31:0] NOP_INSTR = 32'h0000_0013;  // addi x0, x0, 0

  // CSR addresses implemented by csr_file
  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MISA     = 12'h301;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MCYCLE   = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET = 12'hB02;
  localparam logic [11:0] CSR_MCYCLEH  = 12'hB80;
  localparam logic [11:0] CSR_MINSTRETH= 12'hB82;
  localparam logic [11:0] CSR_CYCLE    = 12'hC00;
  localparam logic [11:0] CSR_INSTRET  = 12'hC02;
  localparam logic [11:0] CSR_CYCLEH   = 12'hC80;
  localparam logic [11:0] CSR_INSTRETH = 12'hC82;


  // Coarse ALU operation class from the control unit (Patterson & Hennessy style)
  typedef enum logic [1:0] {
    AOP_ADD    = 2'b00,   // loads, stores, AUIPC, JAL, JALR
    AOP_BRANCH = 2'b01,   // compare chosen by funct3
    AOP_RTYPE  = 2'b10,   // funct3/funct7 of OP
    AOP_ITYPE  = 2'b11    // funct3/funct7 of OP-IMM
  } alu_op_class_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR, ALU_AND
  } alu_op_e;

  typedef enum logic [2:0] {
    WB_NONE = 3'b000,
    WB_DMEM = 3'b001,
    WB_ALU  = 3'b010,
    WB_CSR  = 3'b011,
    WB_IMMU = 3'b100,
    WB_PC4  = 3'b101
  } wb_sel_e;

  typedef enum logic [2:0] {
    TRAP_NONE, TRAP_ECALL, TRAP_EBREAK, TRAP_MRET, TRAP_ILLEGAL
  } trap_kind_e;

  // mcause values of the privileged specification
  localparam logic [31:0] CAUSE_ILLEGAL = 32'd2;
  localparam logic [31:0] CAUSE_BREAK   = 32'd3;
  localparam logic [31:0] CAUSE_ECALL_M = 32'd11;

  typedef struct packed {
    logic          reg_write;
    logic          mem_read;
    logic          mem_write;
    logic          branch;
    logic          jump;       // JAL or JALR
    logic          alu_src_a;  // 0: rs1, 1: PC
    logic          alu_src_b;  // 0: rs2, 1: immediate
    alu_op_class_e alu_op;
    wb_sel_e       wb_sel;
    logic          csr_write;
  } ctrl_t;

  localparam ctrl_t CTRL_NOP = '{reg_write: 1'b0, mem_read: 1'b0, mem_write: 1'b0,
                                 branch: 1'b0, jump: 1'b0, alu_src_a: 1'b0,
                                 alu_src_b: 1'b0, alu_op: AOP_ADD, wb_sel: WB_NONE,
                                 csr_write: 1'b0};

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] pc4;
    logic [31:0] instr;
    logic        b_est;      // branch predicted taken in IF
  } if_id_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] pc4;
    logic [31:0] instr;
    logic        b_est;
    ctrl_t       ctrl;
    logic [2:0]  funct3;
    logic [6:0]  funct7;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic [31:0] imm;
    logic [31:0] rd1;
    logic [31:0] rd2;
    logic [11:0] csr_addr;
    logic [31:0] csr_rdata;
  } id_ex_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] pc4;
    logic [31:0] instr;
    ctrl_t       ctrl;
    logic [2:0]  funct3;
    logic [4:0]  rd;
    logic [31:0] imm;
    logic [31:0] alu_result;
    logic [31:0] store_data;
    logic [11:0] csr_addr;
    logic [31:0] csr_rdata;
    logic [31:0] csr_wdata;
  } ex_mem_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
    ctrl_t       ctrl;
    logic [4:0]  rd;
    logic [31:0] wb_data;     // value written to rd (already selected)
    logic [11:0] csr_addr;
    logic [31:0] csr_wdata;
  } mem_wb_t;

endpackage
