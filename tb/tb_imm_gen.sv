// tb_imm_gen: random instructions of every format. The expected immediate
// is computed from the ISA's field definitions with signed arithmetic,
// independently of the bit concatenations used in the design.
module tb_imm_gen;
  import rv32_pkg::*;
  logic [6:0] opcode; logic [24:0] raw_imm; logic [31:0] imm, ins;
  int exp_i, checks = 0, failures = 0;
  logic [6:0] ops [9] = '{OP_LUI, OP_AUIPC, OP_JAL, OP_JALR, OP_BRANCH, OP_LOAD, OP_STORE, OP_IMM, OP_SYSTEM};
  imm_gen dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 900; i++) begin
      ins = $urandom; opcode = ops[i % 9]; ins[6:0] = opcode; raw_imm = ins[31:7];
      #1;
      case (opcode)
        OP_LUI, OP_AUIPC: exp_i = int'(ins[31:12]) * 4096;
        OP_JAL:    exp_i = (ins[31] ? -(1 << 20) : 0) + int'(ins[19:12]) * 4096 + int'(ins[20]) * 2048 + int'(ins[30:21]) * 2;
        OP_BRANCH: exp_i = (ins[31] ? -(1 << 12) : 0) + int'(ins[7]) * 2048 + int'(ins[30:25]) * 32 + int'(ins[11:8]) * 2;
        OP_STORE:  exp_i = (ins[31] ? -(1 << 11) : 0) + int'(ins[30:25]) * 32 + int'(ins[11:7]);
        default:   exp_i = (ins[31] ? -(1 << 11) : 0) + int'(ins[30:20]);
      endcase
      checks++; if (imm !== 32'(exp_i)) begin failures++; $display("op %b ins %h imm %h exp %h", opcode, ins, imm, 32'(exp_i)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
