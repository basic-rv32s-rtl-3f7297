// tb_debug_uart_controller: fires each trigger and collects the bytes the
// controller hands to a UART transmitter model (busy for a random number
// of cycles per byte); the text is compared with the expected message
// built with $sformatf. Also checks that a trigger arriving during a
// message is ignored and that live counters are printed before a
// benchmark has finished.
module tb_debug_uart_controller;
  logic clk = 0, rst, reg_trigger, result_trigger, pc_inst_trigger, tx_busy, tx_start;
  logic [31:0] dbg_pc, dbg_reg_data, dbg_instruction; logic [4:0] dbg_reg_addr;
  logic [63:0] dbg_mcycle, dbg_minstret, final_cycles, final_instructions;
  logic [7:0] tx_data;
  string text;
  int busy_left = 0, checks = 0, failures = 0;

  debug_uart_controller dut (.*);
  always #5 clk = ~clk;

  // transmitter model: busy from the cycle after tx_start for 3..12 cycles
  always @(posedge clk) begin
    if (rst) begin tx_busy <= 0; busy_left = 0; end
    else if (tx_start && !tx_busy) begin
      text = {text, string'(tx_data)}; tx_busy <= 1; busy_left = $urandom_range(3, 12);
    end else if (tx_busy) begin
      busy_left--; if (busy_left == 0) tx_busy <= 0;
    end
  end

  task automatic fire(input int which, input string exp);
    text = "";
    @(negedge clk);
    if (which == 0) reg_trigger = 1; else if (which == 1) result_trigger = 1; else pc_inst_trigger = 1;
    @(negedge clk); reg_trigger = 0; result_trigger = 0; pc_inst_trigger = 0;
    repeat (30) @(negedge clk);
    pc_inst_trigger = 1; @(negedge clk); pc_inst_trigger = 0;   // must be ignored
    repeat (exp.len() * 16 + 40) @(negedge clk);
    checks++;
    if (text != exp) begin failures++; $display("got \"%s\"\nexp \"%s\"", text, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; reg_trigger = 0; result_trigger = 0; pc_inst_trigger = 0;
    dbg_pc = 32'h0000_01A4; dbg_instruction = 32'h00A5_8593; dbg_reg_addr = 5'd26;
    dbg_reg_data = 32'hDEAD_BEEF; dbg_mcycle = 64'h1234; dbg_minstret = 64'h0ABC;
    final_cycles = 0; final_instructions = 0;
    repeat (3) @(posedge clk); rst = 0;
    fire(0, "x1A: DEADBEEF\r\n");
    fire(2, "PC: 000001A4 Instr: 00A58593\r\n");
    fire(1, "0000000000001234\r\nInstr: 0000000000000ABC\r\n");
    final_cycles = 64'd1043092; final_instructions = 64'd646640;
    fire(1, "00000000000FEA94\r\nInstr: 000000000009DDF0\r\n");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
