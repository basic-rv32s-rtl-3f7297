// tb_instruction_memory: loads random words through the program port and
// reads them back on the fetch port and on the data-side (ROM) port;
// unwritten words must read as NOP.
module tb_instruction_memory;
  localparam int W = 64;
  logic clk = 0, prog_we;
  logic [31:0] pc, instr, rom_addr, rom_rdata, prog_addr, prog_wdata;
  logic [31:0] model [W];
  int checks = 0, failures = 0;

  instruction_memory #(.WORDS(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < W; i++) model[i] = 32'h0000_0013;
    prog_we = 0; pc = 0; rom_addr = 0; prog_addr = 0; prog_wdata = 0;
    for (int i = 0; i < 40; i++) begin
      prog_we = 1; prog_addr = 4 * $urandom_range(0, W - 1); prog_wdata = $urandom;
      @(posedge clk); model[prog_addr[7:2]] = prog_wdata; #1;
    end
    prog_we = 0;
    for (int i = 0; i < 200; i++) begin
      pc = 4 * $urandom_range(0, W - 1); rom_addr = 4 * $urandom_range(0, W - 1) + $urandom_range(0, 3);
      #1;
      checks++; if (instr !== model[pc[7:2]]) begin failures++; $display("fetch %h got %h exp %h", pc, instr, model[pc[7:2]]); end
      checks++; if (rom_rdata !== model[rom_addr[7:2]]) begin failures++; $display("rom %h", rom_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
