// pc_controller: chooses the next fetch address (combinational).
// Priority, highest first:
//   1. trapped      - the trap controller redirects to T_Target (mtvec or mepc)
//   2. ex_redirect  - EX found a jump or a branch misprediction; the PC goes to
//                     the corrected address computed in EX (ex_target)
//   3. b_est        - the branch predictor predicts the fetched branch taken;
//                     the PC goes to its target b_target
//   4. otherwise    - pc + 4
// Stalls are applied at the PC register, not here. The inputs follow the
// signal names of the core diagram (Trapped, T_Target, B_EST, B_Target,
// BP_Miss/EX_Jump); the priority order is this design's choice.
module pc_controller (
  input  logic        trapped,
  input  logic [31:0] t_target,
  input  logic        ex_redirect,
  input  logic [31:0] ex_target,
  input  logic        b_est,
  input  logic [31:0] b_target,
  input  logic [31:0] pc4,
  output logic [31:0] next_pc
);
  always_comb begin
    if (trapped)          next_pc = t_target;
    else if (ex_redirect) next_pc = ex_target;
    else if (b_est)       next_pc = b_target;
    else                  next_pc = pc4;
  end
endmodule
