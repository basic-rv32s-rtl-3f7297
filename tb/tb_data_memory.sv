// tb_data_memory: random byte-enabled writes and reads against a byte
// array model; writes with en low must not change the memory.
module tb_data_memory;
  localparam int W = 32;
  logic clk = 0, en; logic [31:0] addr, wdata, rdata, e; logic [3:0] byte_en;
  logic [7:0] model [4*W];
  int checks = 0, failures = 0;

  data_memory #(.WORDS(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 4 * W; i++) model[i] = 0;
    en = 0; byte_en = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 1500; i++) begin
      addr = 4 * $urandom_range(0, W - 1); byte_en = 4'($urandom); wdata = $urandom;
      en = $urandom_range(0, 5) != 0;
      #1;
      e = {model[addr[6:0] + 3], model[addr[6:0] + 2], model[addr[6:0] + 1], model[addr[6:0]]};
      checks++; if (rdata !== e) begin failures++; $display("addr %h got %h exp %h", addr, rdata, e); end
      @(posedge clk);
      if (en) for (int k = 0; k < 4; k++) if (byte_en[k]) model[addr[6:0] + k] = wdata[8*k +: 8];
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
