// tb_forward_unit: random hazard flags and stage values; the expected
// operand is the MEM-stage result (chosen by its write-back source) if the
// MEM hazard is set, else the WB value if the WB hazard is set, else the
// ID-stage register value; the same for the CSR operand.
module tb_forward_unit;
  import rv32_pkg::*;
  logic [1:0] hazard_mem, hazard_wb; logic csr_hazard_mem, csr_hazard_wb;
  logic [31:0] ex_rd1, ex_rd2, ex_csr_rdata, mem_alu_result, mem_imm, mem_pc4, mem_csr_rdata,
               mem_csr_wdata, wb_data, wb_csr_wdata, fwd_rs1, fwd_rs2, fwd_csr, mv, e1, e2, ec;
  wb_sel_e mem_wb_sel;
  int checks = 0, failures = 0;
  wb_sel_e sels [4] = '{WB_ALU, WB_IMMU, WB_PC4, WB_CSR};
  forward_unit dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) begin
      {hazard_mem, hazard_wb, csr_hazard_mem, csr_hazard_wb} = 6'($urandom);
      ex_rd1 = $urandom; ex_rd2 = $urandom; ex_csr_rdata = $urandom; mem_alu_result = $urandom;
      mem_imm = $urandom; mem_pc4 = $urandom; mem_csr_rdata = $urandom; mem_csr_wdata = $urandom;
      wb_data = $urandom; wb_csr_wdata = $urandom; mem_wb_sel = sels[$urandom_range(0, 3)];
      #1;
      mv = (mem_wb_sel == WB_IMMU) ? mem_imm : (mem_wb_sel == WB_PC4) ? mem_pc4 :
           (mem_wb_sel == WB_CSR) ? mem_csr_rdata : mem_alu_result;
      e1 = hazard_mem[0] ? mv : hazard_wb[0] ? wb_data : ex_rd1;
      e2 = hazard_mem[1] ? mv : hazard_wb[1] ? wb_data : ex_rd2;
      ec = csr_hazard_mem ? mem_csr_wdata : csr_hazard_wb ? wb_csr_wdata : ex_csr_rdata;
      checks++; if (fwd_rs1 !== e1 || fwd_rs2 !== e2 || fwd_csr !== ec) begin failures++; $display("i %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
