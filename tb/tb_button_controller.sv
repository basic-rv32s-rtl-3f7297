// tb_button_controller: presses each button with contact bounce shorter
// than the debounce time; exactly one one-cycle pulse must appear on that
// button's output and none on the others. Also checks that a glitch shorter
// than the debounce time gives no pulse, and the press-to-pulse latency
// (2 synchroniser stages + DEBOUNCE_CYCLES + 1 edge detect).
module tb_button_controller;
  localparam int DB = 16;
  logic clk = 0, rst, btn_up, btn_center, btn_down, btn_left, btn_right;
  logic step_pulse, bench_start, reg_trigger, result_trigger, pc_inst_trigger;
  logic [4:0] btn, outs;
  int checks = 0, failures = 0, cnt [5], first [5];

  button_controller #(.DEBOUNCE_CYCLES(DB)) dut (.*);
  always #5 clk = ~clk;
  assign {btn_right, btn_left, btn_down, btn_center, btn_up} = btn;
  assign outs = {pc_inst_trigger, result_trigger, reg_trigger, bench_start, step_pulse};

  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int k = 0; k < 5; k++) if (outs[k]) begin cnt[k]++; if (first[k] < 0) first[k] = cyc; end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; btn = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int b = 0; b < 5; b++) begin
      int t0;
      foreach (cnt[k]) begin cnt[k] = 0; first[k] = -1; end
      // bounce: short toggles, then a steady press
      for (int g = 0; g < 4; g++) begin btn[b] = 1; repeat (3) @(posedge clk); #1 btn[b] = 0; repeat (2) @(posedge clk); #1; end
      btn[b] = 1; t0 = cyc;
      repeat (3 * DB) @(posedge clk); #1;
      btn[b] = 0;
      repeat (3 * DB) @(posedge clk); #1;
      for (int k = 0; k < 5; k++) begin
        checks++;
        if (cnt[k] != ((k == b) ? 1 : 0)) begin failures++; $display("button %0d: output %0d pulsed %0d times", b, k, cnt[k]); end
      end
      checks++;
      if (first[b] - t0 != DB + 3) begin failures++; $display("button %0d latency %0d", b, first[b] - t0); end
    end
    // a glitch shorter than the debounce time
    foreach (cnt[k]) cnt[k] = 0;
    btn[2] = 1; repeat (DB - 4) @(posedge clk); #1 btn[2] = 0; repeat (3 * DB) @(posedge clk); #1;
    checks++; if (cnt[2] != 0) begin failures++; $display("glitch produced a pulse"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
