// button_controller: turns the five board push-buttons into one-cycle
// control pulses for the SoC.
// Each button is synchronised with two flip-flops, debounced (the level is
// accepted once it has been stable for DEBOUNCE_CYCLES clocks) and its
// rising edge gives a single-cycle pulse. Mapping (in the order the SoC
// diagram draws inputs and outputs): up -> step_pulse (advance the core by
// one enabled clock), center -> bench_start, down -> reg_trigger,
// left -> result_trigger, right -> pc_inst_trigger.
// The five buttons and the five outputs are the paper's; the mapping, the
// debounce method and its 10 ms time (500,000 cycles at 50 MHz) are this
// design's choice.
module button_controller #(
  parameter int DEBOUNCE_CYCLES = 500_000
) (
  input  logic clk,
  input  logic rst,
  input  logic btn_up,
  input  logic btn_center,
  input  logic btn_down,
  input  logic btn_left,
  input  logic btn_right,
  output logic step_pulse,
  output logic bench_start,
  output logic reg_trigger,
  output logic result_trigger,
  output logic pc_inst_trigger
);
  localparam int CW = $clog2(DEBOUNCE_CYCLES + 1);

  logic [4:0] raw, sync1, sync2, stable, stable_q;
  logic [CW-1:0] count [5];

  assign raw = {btn_right, btn_left, btn_down, btn_center, btn_up};

  always_ff @(posedge clk) begin
    if (rst) begin
      sync1    <= '0;
      sync2    <= '0;
      stable   <= '0;
      stable_q <= '0;
      for (int i = 0; i < 5; i++) count[i] <= '0;
    end else begin
      sync1    <= raw;
      sync2    <= sync1;
      stable_q <= stable;
      for (int i = 0; i < 5; i++) begin
        if (sync2[i] == stable[i]) begin
          count[i] <= '0;
        end else if (count[i] == CW'(DEBOUNCE_CYCLES - 1)) begin
          count[i]  <= '0;
          stable[i] <= sync2[i];
        end else begin
          count[i] <= count[i] + 1'b1;
        end
      end
    end
  end

  logic [4:0] rise;
  always_comb begin
    rise            = stable & ~stable_q;
    step_pulse      = rise[0];
    bench_start     = rise[1];
    reg_trigger     = rise[2];
    result_trigger  = rise[3];
    pc_inst_trigger = rise[4];
  end
endmodule
