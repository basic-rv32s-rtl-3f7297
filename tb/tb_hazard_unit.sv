// tb_hazard_unit: random pipeline states with registers drawn from a small
// set so that matches are frequent; checks the forwarding flags, the
// load-use detection and the stall/flush priorities against an
// independent model.
module tb_hazard_unit;
  logic [4:0] id_rs1, id_rs2, ex_rd, ex_rs1, ex_rs2, mem_rd, wb_rd;
  logic id_use_rs1, id_use_rs2, ex_valid, ex_mem_read, ex_csr_read, mem_valid, mem_reg_write,
        mem_csr_write, wb_valid, wb_reg_write, wb_csr_write, ex_redirect, trap_busy, trapped;
  logic [11:0] ex_csr_addr, mem_csr_addr, wb_csr_addr;
  logic [1:0] hazard_mem, hazard_wb; logic csr_hazard_mem, csr_hazard_wb, load_use,
        pc_stall, if_id_stall, if_id_flush, id_ex_flush;
  logic [1:0] ehm, ehw; logic elu, ecm, ecw;
  int checks = 0, failures = 0, n_lu = 0, n_fm = 0;
  hazard_unit dut (.*);
  function automatic logic [4:0] r(); return 5'($urandom_range(0, 3)); endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      id_rs1 = r(); id_rs2 = r(); ex_rd = r(); ex_rs1 = r(); ex_rs2 = r(); mem_rd = r(); wb_rd = r();
      {id_use_rs1, id_use_rs2, ex_valid, ex_mem_read, ex_csr_read, mem_valid, mem_reg_write,
       mem_csr_write, wb_valid, wb_reg_write, wb_csr_write} = 11'($urandom);
      ex_redirect = $urandom_range(0, 5) == 0; trap_busy = $urandom_range(0, 5) == 0;
      trapped = trap_busy && $urandom_range(0, 2) == 0;
      ex_csr_addr = 12'h340 + 12'($urandom_range(0, 1)); mem_csr_addr = 12'h340 + 12'($urandom_range(0, 1));
      wb_csr_addr = 12'h340 + 12'($urandom_range(0, 1));
      #1;
      for (int k = 0; k < 2; k++) begin
        logic [4:0] s; s = k ? ex_rs2 : ex_rs1;
        ehm[k] = mem_valid & mem_reg_write & (mem_rd == s) & (s != 0);
        ehw[k] = wb_valid & wb_reg_write & (wb_rd == s) & (s != 0);
      end
      elu = ex_valid & ex_mem_read & (ex_rd != 0) & ((id_use_rs1 & (id_rs1 == ex_rd)) | (id_use_rs2 & (id_rs2 == ex_rd)));
      ecm = ex_csr_read & mem_valid & mem_csr_write & (mem_csr_addr == ex_csr_addr);
      ecw = ex_csr_read & wb_valid & wb_csr_write & (wb_csr_addr == ex_csr_addr);
      n_lu += elu; n_fm += |ehm;
      checks++;
      if (hazard_mem !== ehm || hazard_wb !== ehw || load_use !== elu || csr_hazard_mem !== ecm || csr_hazard_wb !== ecw) begin
        failures++; $display("i %0d flags", i);
      end
      checks++;
      if (trapped || ex_redirect) begin
        if (!if_id_flush || !id_ex_flush || pc_stall || if_id_stall) begin failures++; $display("i %0d redirect", i); end
      end else if (trap_busy || elu) begin
        if (!pc_stall || !if_id_stall || !id_ex_flush || if_id_flush) begin failures++; $display("i %0d stall", i); end
      end else if (pc_stall || if_id_stall || if_id_flush || id_ex_flush) begin
        failures++; $display("i %0d spurious control", i);
      end
    end
    checks++; if (n_lu == 0 || n_fm == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
