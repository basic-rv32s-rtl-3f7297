// instruction_memory: the core's instruction memory (I.Mem).
// A word-addressed array read asynchronously, as the FPGA build infers it as
// LUT-based distributed RAM. Port 1 fetches the instruction at pc. Port 2
// (rom_addr/rom_rdata) lets the data side load from the instruction region
// (read-only data placed there by the linker): the paper names this bypass
// path between instruction and data memory as the fix for a memory-mapping
// conflict. A write port (prog_*) loads a program; it is this design's
// addition for simulation and for reloading programs. Addresses are byte
// addresses; bits [1:0] are ignored and the index wraps at WORDS.
// Size: 4096 words (16 KiB) is this design's choice (the paper gives none).
// An optional INIT_FILE is read with $readmemh.
module instruction_memory #(
  parameter int    WORDS     = 4096,
  parameter string INIT_FILE = ""
) (
  input  logic        clk,
  input  logic [31:0] pc,
  output logic [31:0] instr,
  input  logic [31:0] rom_addr,
  output logic [31:0] rom_rdata,
  input  logic        prog_we,
  input  logic [31:0] prog_addr,
  input  logic [31:0] prog_wdata
);
  localparam int AW = $clog2(WORDS);
  logic [31:0] mem [WORDS];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = rv32_pkg::NOP_INSTR;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk)
    if (prog_we) mem[prog_addr[AW+1:2]] <= prog_wdata;

  assign instr     = mem[pc[AW+1:2]];
  assign rom_rdata = mem[rom_addr[AW+1:2]];
endmodule
