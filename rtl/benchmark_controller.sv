// benchmark_controller: runs a benchmark on the core and records its cost.
// On bench_start it raises bench_running, which the SoC uses as the core's
// clock enable, and stores the core's mcycle and minstret. The benchmark
// ends when the core retires the end-of-program idiom "jal x0, 0"
// (0x0000006F, a jump to itself) while enabled: bench_running falls,
// bench_done rises and final_cycles / final_instructions hold the mcycle
// and minstret differences. bench_done stays high until the next
// bench_start. The block, its ports and the use of mcycle/minstret are the
// paper's; the end-of-benchmark test is this design's choice.
module benchmark_controller (
  input  logic        clk,
  input  logic        rst,
  input  logic        clk_en,        // the core's clock enable
  input  logic        bench_start,
  input  logic        retire,        // instruction/pc below are retiring
  input  logic [31:0] instruction,
  input  logic [63:0] mcycle,
  input  logic [63:0] minstret,
  output logic        bench_running,
  output logic        bench_done,
  output logic [63:0] final_cycles,
  output logic [63:0] final_instructions
);
  localparam logic [31:0] HALT_INSTR = 32'h0000_006F;

  logic [63:0] start_cycles, start_instret;

  always_ff @(posedge clk) begin
    if (rst) begin
      bench_running      <= 1'b0;
      bench_done         <= 1'b0;
      start_cycles       <= '0;
      start_instret      <= '0;
      final_cycles       <= '0;
      final_instructions <= '0;
    end else if (bench_start && !bench_running) begin
      bench_running <= 1'b1;
      bench_done    <= 1'b0;
      start_cycles  <= mcycle;
      start_instret <= minstret;
    end else if (bench_running && clk_en && retire && instruction == HALT_INSTR) begin
      bench_running      <= 1'b0;
      bench_done         <= 1'b1;
      final_cycles       <= mcycle - start_cycles;
      final_instructions <= minstret - start_instret;
    end
  end
endmodule
