// csr_file: the machine-mode control and status registers (CSRFile) of the
// Zicsr extension.
// Registers: mstatus (MIE/MPIE bits writable, MPP reads 11), misa (read-only,
// RV32I), mtvec, mscratch, mepc, mcause, and the 64-bit counters mcycle and
// minstret (also readable through the user aliases cycle/instret and the
// ...h upper halves). Unknown addresses read as zero and ignore writes.
// Timing: one asynchronous read port (ra/rdata) used in ID; a write in the
// same cycle to the same address is passed through to rdata. Two synchronous
// write ports: the WB-stage port (we/wa/wd) and the trap controller's port
// (t_we/t_wa/t_wd), which wins when both write. mcycle counts every cycle the
// core is enabled; minstret counts retire pulses. A CSR write to a counter
// replaces that cycle's increment. The paper names the block and the
// mcycle/minstret counters it reads for the benchmark; the register set
// beyond those, and the reset values, are this design's choice.
module csr_file
  import rv32_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [11:0] ra,
  output logic [31:0] rdata,
  input  logic        we,
  input  logic [11:0] wa,
  input  logic [31:0] wd,
  input  logic        t_we,
  input  logic [11:0] t_wa,
  input  logic [31:0] t_wd,
  input  logic        retire,
  output logic [31:0] mtvec,
  output logic [31:0] mepc,
  output logic [63:0] mcycle,
  output logic [63:0] minstret
);
  localparam logic [31:0] MISA_VALUE = 32'h4000_0100;  // MXL=1 (32-bit), I

  logic [31:0] mstatus, mscratch, mcause;
  logic        w_en;
  logic [11:0] w_addr;
  logic [31:0] w_data;

  always_comb begin
    w_en   = t_we | we;
    w_addr = t_we ? t_wa : wa;
    w_data = t_we ? t_wd : wd;
  end

  function automatic logic [31:0] read_csr(input logic [11:0] a);
    unique case (a)
      CSR_MSTATUS:               return mstatus | 32'h0000_1800;
      CSR_MISA:                  return MISA_VALUE;
      CSR_MTVEC:                 return mtvec;
      CSR_MSCRATCH:              return mscratch;
      CSR_MEPC:                  return mepc;
      CSR_MCAUSE:                return mcause;
      CSR_MCYCLE,   CSR_CYCLE:   return mcycle[31:0];
      CSR_MCYCLEH,  CSR_CYCLEH:  return mcycle[63:32];
      CSR_MINSTRET, CSR_INSTRET: return minstret[31:0];
      CSR_MINSTRETH,CSR_INSTRETH:return minstret[63:32];
      default:                   return 32'h0;
    endcase
  endfunction

  always_comb begin
    rdata = read_csr(ra);
    if (w_en && w_addr == ra) rdata = w_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mstatus  <= '0;
      mtvec    <= '0;
      mscratch <= '0;
      mepc     <= '0;
      mcause   <= '0;
      mcycle   <= '0;
      minstret <= '0;
    end else if (en) begin
      mcycle   <= mcycle + 64'd1;
      if (retire) minstret <= minstret + 64'd1;
      if (w_en) begin
        unique case (w_addr)
          CSR_MSTATUS:   mstatus  <= w_data & 32'h0000_0088;
          CSR_MTVEC:     mtvec    <= {w_data[31:2], 2'b00};
          CSR_MSCRATCH:  mscratch <= w_data;
          CSR_MEPC:      mepc     <= {w_data[31:2], 2'b00};
          CSR_MCAUSE:    mcause   <= w_data;
          CSR_MCYCLE:    mcycle[31:0]    <= w_data;
          CSR_MCYCLEH:   mcycle[63:32]   <= w_data;
          CSR_MINSTRET:  minstret[31:0]  <= w_data;
          CSR_MINSTRETH: minstret[63:32] <= w_data;
          default: ;
        endcase
      end
    end
  end
endmodule
