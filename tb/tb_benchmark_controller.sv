// tb_benchmark_controller: a retire stream with random clock-enable gaps and
// counters kept by the testbench; after bench_start the controller must
// run until "jal x0, 0" retires while enabled, then report the cycle and
// instruction differences; a halt seen with the enable low is ignored.
// Two benchmark runs back to back.
module tb_benchmark_controller;
  logic clk = 0, rst, clk_en, bench_start, retire, bench_running, bench_done;
  logic [31:0] instruction; logic [63:0] mcycle, minstret, final_cycles, final_instructions;
  int checks = 0, failures = 0;
  longint c0, i0;

  benchmark_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rst = 1; clk_en = 0; bench_start = 0; retire = 0; instruction = 32'h13; mcycle = 64'd500; minstret = 64'd300;
    repeat (2) @(posedge clk); #1 rst = 0;
    chk(!bench_running && !bench_done, "idle after reset");
    for (int run = 0; run < 2; run++) begin
      int len; len = $urandom_range(50, 200);
      bench_start = 1; @(posedge clk); #1 bench_start = 0;
      chk(bench_running && !bench_done, "running after start");
      c0 = longint'(mcycle); i0 = longint'(minstret);
      for (int k = 0; k < len; k++) begin
        // retire is the WB valid bit, which stays high while the enable is low
        clk_en = (k == len / 2) ? 1'b0 : ($urandom_range(0, 3) != 0);
        retire = (k == len / 2) ? 1'b1 : 1'($urandom_range(0, 1));
        instruction = (k == len / 2) ? 32'h6F : 32'h13;  // halt with enable low: ignored
        @(posedge clk); #1;
        if (clk_en) begin mcycle++; if (retire) minstret++; end
      end
      chk(bench_running, "still running");
      clk_en = 1; retire = 1; instruction = 32'h6F;
      begin
        longint ec, ei; ec = longint'(mcycle) - c0; ei = longint'(minstret) - i0;
        @(posedge clk); #1 mcycle++; minstret++;
        chk(!bench_running && bench_done, "done after halt");
        chk(final_cycles == 64'(ec), $sformatf("cycles %0d exp %0d", final_cycles, ec));
        chk(final_instructions == 64'(ei), $sformatf("instructions %0d exp %0d", final_instructions, ei));
      end
      instruction = 32'h13; repeat (3) @(posedge clk); #1;
      chk(bench_done && !bench_running, "done holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
