// tb_pc_plus4: random PCs, checks pc4 == pc + 4 (with wrap-around).
module tb_pc_plus4;
  logic [31:0] pc, pc4;
  int checks = 0, failures = 0;
  pc_plus4 dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 200; i++) begin
      pc = (i == 0) ? 32'hFFFF_FFFC : $urandom; #1;
      checks++; if (pc4 !== 32'(64'(pc) + 4)) begin failures++; $display("pc %h pc4 %h", pc, pc4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
