// branch_predictor: 2-bit dynamic branch predictor of the IF stage.
// One 2-bit saturating counter (00 strongly not taken .. 11 strongly taken)
// predicts every conditional branch fetched. If the fetched instruction is a
// branch (opcode BRANCH) and the counter's upper bit is set, b_est is raised
// and b_target = if_pc + B-immediate of the fetched instruction, so the taken
// path is fetched on the next cycle. The counter is trained in EX: when a
// branch resolves (ex_branch), it counts up if taken, down if not.
// The paper gives a 2-bit dynamic predictor in IF with a flush on a
// misprediction found in EX; a single global counter and the reset state
// (01, weakly not taken) are this design's choice.
module branch_predictor
  import rv32_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [31:0] if_pc,
  input  logic [31:0] if_instr,
  input  logic        ex_branch,   // a valid branch resolves in EX this cycle
  input  logic        ex_taken,    // its actual outcome
  output logic        b_est,
  output logic [31:0] b_target
);
  logic [1:0]  counter;
  logic [31:0] imm_b;

  always_comb begin
    imm_b    = {{20{if_instr[31]}}, if_instr[7], if_instr[30:25], if_instr[11:8], 1'b0};
    b_target = if_pc + imm_b;
    b_est    = (if_instr[6:0] == OP_BRANCH) && counter[1];
  end

  always_ff @(posedge clk) begin
    if (rst) counter <= 2'b01;
    else if (en && ex_branch) begin
      if (ex_taken  && counter != 2'b11) counter <= counter + 2'd1;
      if (!ex_taken && counter != 2'b00) counter <= counter - 2'd1;
    end
  end
endmodule
