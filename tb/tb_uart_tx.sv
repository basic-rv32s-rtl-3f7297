// tb_uart_tx: sends random bytes back to back and decodes the line by
// sampling each bit in its middle; checks start bit, data, stop bit,
// idle-high line, the busy window (10 bit times per byte) and that a
// tx_start while busy is ignored.
module tb_uart_tx;
  localparam int CPB = 8;
  logic clk = 0, rst, tx_start, tx, tx_busy; logic [7:0] tx_data, got;
  int checks = 0, failures = 0, busy_cycles;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; tx_start = 0; tx_data = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    checks++; if (tx !== 1'b1 || tx_busy !== 1'b0) begin failures++; $display("idle line"); end
    for (int n = 0; n < 40; n++) begin
      logic [7:0] b; b = 8'($urandom);
      tx_data = b; tx_start = 1; @(posedge clk); #1 tx_start = 0;
      tx_data = ~b;
      if (n % 5 == 0) begin tx_start = 1; end       // ignored: busy
      // middle of the start bit
      repeat (CPB / 2 - 1) @(posedge clk); #1 tx_start = 0;
      checks++; if (tx !== 1'b0 || !tx_busy) begin failures++; $display("start bit"); end
      for (int k = 0; k < 8; k++) begin
        repeat (CPB) @(posedge clk); #1 got[k] = tx;
      end
      repeat (CPB) @(posedge clk); #1;
      checks++; if (tx !== 1'b1) begin failures++; $display("stop bit"); end
      checks++; if (got !== b) begin failures++; $display("byte %h got %h", b, got); end
      busy_cycles = CPB / 2 - 1 + 9 * CPB;
      while (tx_busy) begin @(posedge clk); #1 busy_cycles++; end
      checks++; if (busy_cycles != 10 * CPB) begin failures++; $display("busy for %0d cycles", busy_cycles); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
