// data_memory: the core's data memory (Data_Memory), word-organised with
// byte write enables. Read is asynchronous (LUT-based distributed RAM in the
// FPGA build, as the paper states for all memories); write happens on the
// rising edge when en is high and a byte enable is set. Byte addresses;
// bits [1:0] select lanes through be_logic, the index wraps at WORDS.
// Size 4096 words (16 KiB) is this design's choice (the paper gives none).
module data_memory #(
  parameter int WORDS = 4096
) (
  input  logic        clk,
  input  logic        en,
  input  logic [31:0] addr,
  input  logic [3:0]  byte_en,
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);
  localparam int AW = $clog2(WORDS);
  logic [31:0] mem [WORDS];

  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (en) begin
      for (int b = 0; b < 4; b++)
        if (byte_en[b]) mem[addr[AW+1:2]][8*b +: 8] <= wdata[8*b +: 8];
    end
  end

  assign rdata = mem[addr[AW+1:2]];
endmodule
