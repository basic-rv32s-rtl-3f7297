// tb_be_logic: random store and load sizes/offsets. Store lanes are checked
// by merging the lane data into a random memory word the way the memory
// would and comparing with a byte-wise model; loads are checked against
// byte-wise extraction with sign/zero extension.
module tb_be_logic;
  logic mem_write; logic [2:0] funct3; logic [1:0] addr_lo; logic [3:0] byte_en;
  logic [31:0] rd2, dm_rd, bedm_wd, berf_wd, merged, exp_w, exp_l;
  logic [7:0] by [4];
  int checks = 0, failures = 0;
  logic [2:0] st [3] = '{3'd0, 3'd1, 3'd2};
  logic [2:0] ld [5] = '{3'd0, 3'd1, 3'd2, 3'd4, 3'd5};
  be_logic dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) begin
      rd2 = $urandom; dm_rd = $urandom;
      // store
      mem_write = 1; funct3 = st[$urandom_range(0, 2)];
      addr_lo = (funct3 == 0) ? 2'($urandom) : (funct3 == 1) ? {1'($urandom), 1'b0} : 2'b00;
      #1;
      for (int k = 0; k < 4; k++) merged[8*k +: 8] = byte_en[k] ? bedm_wd[8*k +: 8] : dm_rd[8*k +: 8];
      for (int k = 0; k < 4; k++) by[k] = dm_rd[8*k +: 8];
      if (funct3 == 0) by[addr_lo] = rd2[7:0];
      else if (funct3 == 1) begin by[addr_lo] = rd2[7:0]; by[addr_lo + 1] = rd2[15:8]; end
      else for (int k = 0; k < 4; k++) by[k] = rd2[8*k +: 8];
      exp_w = {by[3], by[2], by[1], by[0]};
      checks++; if (merged !== exp_w) begin failures++; $display("store f3 %0d off %0d be %b got %h exp %h", funct3, addr_lo, byte_en, merged, exp_w); end
      // load
      mem_write = 0; funct3 = ld[$urandom_range(0, 4)];
      addr_lo = (funct3[1:0] == 0) ? 2'($urandom) : (funct3[1:0] == 1) ? {1'($urandom), 1'b0} : 2'b00;
      #1;
      for (int k = 0; k < 4; k++) by[k] = dm_rd[8*k +: 8];
      case (funct3)
        3'd0: exp_l = 32'($signed(by[addr_lo]));
        3'd4: exp_l = {24'b0, by[addr_lo]};
        3'd1: exp_l = 32'($signed({by[addr_lo + 1], by[addr_lo]}));
        3'd5: exp_l = {16'b0, by[addr_lo + 1], by[addr_lo]};
        default: exp_l = dm_rd;
      endcase
      checks++; if (berf_wd !== exp_l || byte_en !== 4'b0) begin failures++; $display("load f3 %0d off %0d got %h exp %h", funct3, addr_lo, berf_wd, exp_l); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
