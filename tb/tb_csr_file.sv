// tb_csr_file: CSR writes and reads through both write ports, write-through
// on the read port, the trap port's priority, the read-only misa and
// mstatus fields, and the mcycle/minstret counters (counting only with en,
// minstret only on retire) against counters kept in the testbench.
module tb_csr_file;
  import rv32_pkg::*;
  logic clk = 0, rst, en, we, t_we, retire;
  logic [11:0] ra, wa, t_wa; logic [31:0] rdata, wd, t_wd, mtvec, mepc;
  logic [63:0] mcycle, minstret, cyc, ins;
  int checks = 0, failures = 0;

  csr_file dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++; if (got !== exp) begin failures++; $display("%s got %h exp %h", what, got, exp); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    we = 1; wa = a; wd = d; @(posedge clk); #1 we = 0;
    if (en) cyc++;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 1; we = 0; t_we = 0; retire = 0; ra = 0; wa = 0; wd = 0; t_wa = 0; t_wd = 0;
    @(posedge clk); #1 rst = 0; cyc = 0; ins = 0;
    wr(CSR_MTVEC, 32'h0000_0203);     ra = CSR_MTVEC;    #1 chk(rdata, 32'h200, "mtvec");
    chk(mtvec, 32'h200, "mtvec port");
    wr(CSR_MSCRATCH, 32'hCAFE_F00D);  ra = CSR_MSCRATCH; #1 chk(rdata, 32'hCAFE_F00D, "mscratch");
    wr(CSR_MSTATUS, 32'hFFFF_FFFF);   ra = CSR_MSTATUS;  #1 chk(rdata, 32'h0000_1888, "mstatus");
    wr(CSR_MISA, 32'h0);              ra = CSR_MISA;     #1 chk(rdata, 32'h4000_0100, "misa");
    ra = 12'h7C0; #1 chk(rdata, 32'h0, "unknown csr");
    // write-through on the read port
    we = 1; wa = CSR_MSCRATCH; wd = 32'h1234_5678; ra = CSR_MSCRATCH; #1
    chk(rdata, 32'h1234_5678, "write-through");
    @(posedge clk); #1 we = 0; cyc++;
    // trap port wins over WB port
    we = 1; wa = CSR_MEPC; wd = 32'h1111_1110; t_we = 1; t_wa = CSR_MEPC; t_wd = 32'h0000_0444;
    @(posedge clk); #1 we = 0; t_we = 0; cyc++;
    ra = CSR_MEPC; #1 chk(rdata, 32'h444, "trap priority"); chk(mepc, 32'h444, "mepc port");
    t_we = 1; t_wa = CSR_MCAUSE; t_wd = 32'd11; @(posedge clk); #1 t_we = 0; cyc++;
    ra = CSR_MCAUSE; #1 chk(rdata, 32'd11, "mcause");
    // counters
    for (int i = 0; i < 200; i++) begin
      en = $urandom_range(0, 3) != 0; retire = $urandom_range(0, 1);
      @(posedge clk); if (en) begin cyc++; if (retire) ins++; end
      #1;
      ra = CSR_MCYCLE;   #1 chk(rdata, cyc[31:0], "mcycle");
      ra = CSR_INSTRET;  #1 chk(rdata, ins[31:0], "instret");
      checks++; if (mcycle !== cyc || minstret !== ins) begin failures++; $display("counter ports"); end
    end
    en = 1; retire = 0;
    wr(CSR_MCYCLEH, 32'h0000_0005); ra = CSR_CYCLEH; #1 chk(rdata, 32'h5, "mcycleh");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
