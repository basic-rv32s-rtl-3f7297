// tb_control_unit: one instruction of each class, control bundle compared
// with a table written out from the RV32I semantics.
module tb_control_unit;
  import rv32_pkg::*;
  logic [6:0] opcode; logic [2:0] funct3; logic [4:0] rs1; ctrl_t ctrl;
  int checks = 0, failures = 0;
  control_unit dut (.*);

  task automatic expect_ctrl(input logic [6:0] op, input logic [2:0] f3, input logic [4:0] r1,
                             input logic rw, mr, mw, br, jp, sa, sb, input alu_op_class_e ao,
                             input wb_sel_e ws, input logic cw);
    opcode = op; funct3 = f3; rs1 = r1; #1;
    checks++;
    if (ctrl.reg_write !== rw || ctrl.mem_read !== mr || ctrl.mem_write !== mw ||
        ctrl.branch !== br || ctrl.jump !== jp || ctrl.alu_src_a !== sa || ctrl.alu_src_b !== sb ||
        ctrl.alu_op !== ao || ctrl.wb_sel !== ws || ctrl.csr_write !== cw) begin
      failures++; $display("opcode %b funct3 %b: got %p", op, f3, ctrl);
    end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    //            op         f3     rs1  rw mr mw br jp sa sb ALUOp       wb       csr
    expect_ctrl(OP_LUI,    3'd0, 5'd1, 1, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_IMMU, 0);
    expect_ctrl(OP_AUIPC,  3'd0, 5'd1, 1, 0, 0, 0, 0, 1, 1, AOP_ADD,    WB_ALU,  0);
    expect_ctrl(OP_JAL,    3'd0, 5'd1, 1, 0, 0, 0, 1, 1, 1, AOP_ADD,    WB_PC4,  0);
    expect_ctrl(OP_JALR,   3'd0, 5'd1, 1, 0, 0, 0, 1, 0, 1, AOP_ADD,    WB_PC4,  0);
    expect_ctrl(OP_BRANCH, 3'd1, 5'd1, 0, 0, 0, 1, 0, 0, 0, AOP_BRANCH, WB_NONE, 0);
    expect_ctrl(OP_LOAD,   3'd2, 5'd1, 1, 1, 0, 0, 0, 0, 1, AOP_ADD,    WB_DMEM, 0);
    expect_ctrl(OP_STORE,  3'd2, 5'd1, 0, 0, 1, 0, 0, 0, 1, AOP_ADD,    WB_NONE, 0);
    expect_ctrl(OP_IMM,    3'd4, 5'd1, 1, 0, 0, 0, 0, 0, 1, AOP_ITYPE,  WB_ALU,  0);
    expect_ctrl(OP_OP,     3'd0, 5'd1, 1, 0, 0, 0, 0, 0, 0, AOP_RTYPE,  WB_ALU,  0);
    expect_ctrl(OP_SYSTEM, 3'd1, 5'd0, 1, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_CSR,  1); // csrrw x0
    expect_ctrl(OP_SYSTEM, 3'd2, 5'd0, 1, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_CSR,  0); // csrrs rs1=x0
    expect_ctrl(OP_SYSTEM, 3'd2, 5'd3, 1, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_CSR,  1);
    expect_ctrl(OP_SYSTEM, 3'd7, 5'd0, 1, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_CSR,  0); // csrrci 0
    expect_ctrl(OP_SYSTEM, 3'd5, 5'd0, 1, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_CSR,  1); // csrrwi
    expect_ctrl(OP_SYSTEM, 3'd0, 5'd0, 0, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_NONE, 0); // ecall
    expect_ctrl(OP_FENCE,  3'd0, 5'd0, 0, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_NONE, 0);
    expect_ctrl(7'h7F,     3'd0, 5'd0, 0, 0, 0, 0, 0, 0, 0, AOP_ADD,    WB_NONE, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
