// program_counter: the fetch-stage PC register.
// Loads next_pc on a rising clock edge when the core's clock enable (en) is
// high and the hazard unit does not stall the PC. Synchronous active-high
// reset to RESET_PC. The register itself is named in the core diagram; the
// reset value and the synchronous reset are this design's choice.
module program_counter #(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,        // core clock enable (single step / run)
  input  logic        stall,     // PC_Stall from the hazard unit
  input  logic [31:0] next_pc,
  output logic [31:0] pc
);
  always_ff @(posedge clk) begin
    if (rst)                pc <= RESET_PC;
    else if (en && !stall)  pc <= next_pc;
  end
endmodule
