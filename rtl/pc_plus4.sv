// pc_plus4: the fetch-stage incrementer, pc4 = pc + 4 (combinational).
// Named in the core diagram; its value feeds the PC controller and is carried
// down the pipeline as the link value of JAL/JALR.
module pc_plus4 (
  input  logic [31:0] pc,
  output logic [31:0] pc4
);
  always_comb pc4 = pc + 32'd4;
endmodule
