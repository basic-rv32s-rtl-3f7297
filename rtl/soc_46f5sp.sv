// soc_46f5sp: the 46F5SP SoC that carries the RV32I46F_5SP core on the
// FPGA board for verification and benchmarking.
// Blocks: the core (with its instruction and data memories), the button
// controller, the benchmark controller, the debug UART controller and the
// UART transmitter. The core runs only when its clock enable is high:
// continuously while a benchmark runs (bench_running), or for one clock per
// press of the step button (step_pulse) for instruction-level debugging.
// The debug UART controller prints register writes, the retiring PC and
// instruction, and the benchmark's cycle and instruction counts.
// Reset: the board's CPU_RESET button is active low (reset_n); it is
// synchronised with two flip-flops into an active-high synchronous reset.
// LEDs: led[0] = bench_running, led[1] = bench_done,
// led[7:2] = low six bits of the EX-stage ALU result.
// prog_* load a program into the instruction memory (the paper says
// programs can be loaded; the port itself is this design's choice).
// Structure and signal names follow the SoC diagram; the LED use, the clock
// enable rule and the reset synchroniser are this design's choices.
module soc_46f5sp #(
  parameter int IMEM_WORDS      = 4096,
  parameter int DMEM_WORDS      = 4096,
  parameter int DEBOUNCE_CYCLES = 500_000,
  parameter int CLKS_PER_BIT    = 434
) (
  input  logic        clk,
  input  logic        reset_n,
  input  logic        btn_up,
  input  logic        btn_center,
  input  logic        btn_down,
  input  logic        btn_left,
  input  logic        btn_right,
  input  logic        prog_we,
  input  logic [31:0] prog_addr,
  input  logic [31:0] prog_wdata,
  output logic        uart_txd,
  output logic [7:0]  led
);
  logic [1:0] rst_sync;
  logic       rst;

  always_ff @(posedge clk) rst_sync <= {rst_sync[0], ~reset_n};
  assign rst = rst_sync[1];

  logic step_pulse, bench_start, reg_trigger, result_trigger, pc_inst_trigger;
  logic bench_running, bench_done, core_en;
  logic [31:0] dbg_pc, dbg_instruction, dbg_reg_data, dbg_alu_result;
  logic [4:0]  dbg_reg_addr;
  logic        dbg_retire;
  logic [63:0] dbg_mcycle, dbg_minstret, final_cycles, final_instructions;
  logic        tx_start, tx_busy;
  logic [7:0]  tx_data;

  button_controller #(.DEBOUNCE_CYCLES(DEBOUNCE_CYCLES)) u_btn (
    .clk, .rst, .btn_up, .btn_center, .btn_down, .btn_left, .btn_right,
    .step_pulse, .bench_start, .reg_trigger, .result_trigger, .pc_inst_trigger);

  assign core_en = bench_running | step_pulse;

  rv32i46f_5sp #(.IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS)) u_core (
    .clk, .rst, .en(core_en), .prog_we, .prog_addr, .prog_wdata,
    .dbg_pc, .dbg_instruction, .dbg_retire, .dbg_reg_addr, .dbg_reg_data,
    .dbg_alu_result, .dbg_mcycle, .dbg_minstret);

  benchmark_controller u_bench (
    .clk, .rst, .clk_en(core_en), .bench_start, .retire(dbg_retire),
    .instruction(dbg_instruction), .mcycle(dbg_mcycle), .minstret(dbg_minstret),
    .bench_running, .bench_done, .final_cycles, .final_instructions);

  debug_uart_controller u_dbg (
    .clk, .rst, .reg_trigger, .result_trigger, .pc_inst_trigger,
    .dbg_pc, .dbg_reg_addr, .dbg_reg_data, .dbg_instruction, .dbg_mcycle, .dbg_minstret,
    .final_cycles, .final_instructions, .tx_busy, .tx_start, .tx_data);

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst, .tx_start, .tx_data, .tx(uart_txd), .tx_busy);

  assign led = {dbg_alu_result[5:0], bench_done, bench_running};
endmodule
