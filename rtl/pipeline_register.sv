// pipeline_register: one stage register of the 5-stage pipeline, used for
// IF/ID, ID/EX, EX/MEM and MEM/WB with the stage's struct as type T.
// On a rising edge with en high: flush loads BUBBLE (an invalid, no-effect
// entry), else stall holds the content, else d is loaded. flush wins over
// stall. Reset loads BUBBLE. The four registers and their stall/flush
// controls are drawn in the core diagram; one shared type-parameterised
// module for all four is this design's choice.
module pipeline_register #(
  parameter type T      = logic [31:0],
  parameter T    BUBBLE = '0
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  input  logic stall,
  input  logic flush,
  input  T     d,
  output T     q
);
  always_ff @(posedge clk) begin
    if (rst)             q <= BUBBLE;
    else if (en) begin
      if (flush)         q <= BUBBLE;
      else if (!stall)   q <= d;
    end
  end
endmodule
