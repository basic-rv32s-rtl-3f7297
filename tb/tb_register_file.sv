// tb_register_file: random writes and reads against an array model; x0
// stays zero, a same-cycle write is visible on the read ports, en low
// blocks writes.
module tb_register_file;
  logic clk = 0, rst, en, reg_write;
  logic [4:0] wa, ra1, ra2; logic [31:0] wd, rd1, rd2, e1, e2;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  register_file dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 1; reg_write = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0;
    @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 32; i++) model[i] = '0;
    for (int i = 0; i < 1000; i++) begin
      reg_write = $urandom_range(0, 1); en = $urandom_range(0, 5) != 0;
      wa = 5'($urandom); wd = $urandom; ra1 = 5'($urandom); ra2 = (i % 4 == 0) ? wa : 5'($urandom);
      #1;
      e1 = (reg_write && wa != 0 && wa == ra1) ? wd : model[ra1];
      e2 = (reg_write && wa != 0 && wa == ra2) ? wd : model[ra2];
      checks++; if (rd1 !== e1 || rd2 !== e2) begin failures++; $display("i %0d rd1 %h/%h rd2 %h/%h", i, rd1, e1, rd2, e2); end
      @(posedge clk);
      if (en && reg_write && wa != 0) model[wa] = wd;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
