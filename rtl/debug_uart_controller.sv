// debug_uart_controller: prints debug data and benchmark results over the
// UART as ASCII text, one byte at a time through uart_tx.
// Three triggers (one-cycle pulses from the button controller) start a
// message; the data it shows are captured when the trigger arrives. Hex
// digits are upper case, lines end in CR LF.
//   reg_trigger     "xAA: DDDDDDDD"    register write seen at WB (address,
//                                      data)                          15 bytes
//   result_trigger  "CCCCCCCCCCCCCCCC" then "Instr: IIIIIIIIIIIIIIII": the
//                   benchmark's cycles and instructions as 64-bit hex; if
//                   no benchmark has finished (final_cycles = 0) the live
//                   mcycle/minstret counters are printed instead     43 bytes
//   pc_inst_trigger "PC: PPPPPPPP Instr: IIIIIIII"  retiring PC and
//                   instruction                                      30 bytes
// Triggers that arrive while a message is being sent are ignored.
// Handshake with uart_tx: tx_start is raised for one cycle while tx_busy is
// low; the next byte is issued once tx_busy has risen and fallen again.
// The inputs follow the SoC diagram; the result format follows the
// terminal output the paper shows (a hex cycle count line, then
// "Instr: " and a hex instruction count). The widths of the fields and the
// other two formats are this design's choice.
module debug_uart_controller (
  input  logic        clk,
  input  logic        rst,
  input  logic        reg_trigger,
  input  logic        result_trigger,
  input  logic        pc_inst_trigger,
  input  logic [31:0] dbg_pc,
  input  logic [4:0]  dbg_reg_addr,
  input  logic [31:0] dbg_reg_data,
  input  logic [31:0] dbg_instruction,
  input  logic [63:0] dbg_mcycle,
  input  logic [63:0] dbg_minstret,
  input  logic [63:0] final_cycles,
  input  logic [63:0] final_instructions,
  input  logic        tx_busy,
  output logic        tx_start,
  output logic [7:0]  tx_data
);
  typedef enum logic [1:0] {MSG_REG, MSG_RESULT, MSG_PCINST} msg_e;
  typedef enum logic [1:0] {IDLE, ISSUE, WAIT_BUSY, WAIT_DONE} state_e;

  state_e      state;
  msg_e        msg;
  logic [63:0] val_a, val_b;
  logic [5:0]  idx;
  logic [5:0]  last_idx;

  localparam logic [55:0] S_INSTR  = "Instr: ";
  localparam logic [31:0] S_PC     = "PC: ";
  localparam logic [63:0] S_INSTR2 = " Instr: ";

  function automatic logic [7:0] hex(input logic [3:0] n);
    return (n < 4'd10) ? (8'h30 + {4'h0, n}) : (8'h37 + {4'h0, n});
  endfunction

  function automatic logic [3:0] nib(input logic [63:0] v, input int digits, input int pos);
    // pos-th digit (0 = most significant) of a number printed with 'digits' digits
    return 4'(v >> (4 * (digits - 1 - pos)));
  endfunction

  function automatic logic [7:0] char_at(input msg_e m, input logic [5:0] i,
                                         input logic [63:0] a, input logic [63:0] b);
    int k;
    k = int'(i);
    unique case (m)
      MSG_REG: begin
        if (k == 0)                 return "x";
        else if (k < 3)             return hex(nib(a, 2, k - 1));
        else if (k == 3)            return ":";
        else if (k == 4)            return " ";
        else if (k < 13)            return hex(nib(b, 8, k - 5));
        else if (k == 13)           return 8'h0D;
        else                        return 8'h0A;
      end
      MSG_RESULT: begin
        if (k < 16)                 return hex(nib(a, 16, k));
        else if (k == 16)           return 8'h0D;
        else if (k == 17)           return 8'h0A;
        else if (k < 25)            return S_INSTR[8 * (24 - k) +: 8];
        else if (k < 41)            return hex(nib(b, 16, k - 25));
        else if (k == 41)           return 8'h0D;
        else                        return 8'h0A;
      end
      default: begin
        if (k < 4)                  return S_PC[8 * (3 - k) +: 8];
        else if (k < 12)            return hex(nib(a, 8, k - 4));
        else if (k < 20)            return S_INSTR2[8 * (19 - k) +: 8];
        else if (k < 28)            return hex(nib(b, 8, k - 20));
        else if (k == 28)           return 8'h0D;
        else                        return 8'h0A;
      end
    endcase
  endfunction

  always_comb begin
    unique case (msg)
      MSG_REG:    last_idx = 6'd14;
      MSG_RESULT: last_idx = 6'd42;
      default:    last_idx = 6'd29;
    endcase
    tx_start = (state == ISSUE) && !tx_busy;
    tx_data  = char_at(msg, idx, val_a, val_b);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      msg   <= MSG_REG;
      val_a <= '0;
      val_b <= '0;
      idx   <= '0;
    end else begin
      unique case (state)
        IDLE: begin
          idx <= '0;
          if (reg_trigger) begin
            msg <= MSG_REG;    val_a <= {59'b0, dbg_reg_addr}; val_b <= {32'b0, dbg_reg_data};
            state <= ISSUE;
          end else if (result_trigger) begin
            msg <= MSG_RESULT;
            if (final_cycles != '0) begin val_a <= final_cycles; val_b <= final_instructions; end
            else                    begin val_a <= dbg_mcycle;   val_b <= dbg_minstret;       end
            state <= ISSUE;
          end else if (pc_inst_trigger) begin
            msg <= MSG_PCINST; val_a <= {32'b0, dbg_pc}; val_b <= {32'b0, dbg_instruction};
            state <= ISSUE;
          end
        end
        ISSUE:     if (!tx_busy) state <= WAIT_BUSY;
        WAIT_BUSY: if (tx_busy)  state <= WAIT_DONE;
        WAIT_DONE: if (!tx_busy) begin
                     if (idx == last_idx) state <= IDLE;
                     else begin idx <= idx + 6'd1; state <= ISSUE; end
                   end
        default:   state <= IDLE;
      endcase
    end
  end
endmodule
