// tb_pipeline_register: random stall/flush/enable against a model register;
// flush must win over stall and load the bubble value.
module tb_pipeline_register;
  typedef struct packed { logic valid; logic [15:0] data; } t_t;
  localparam t_t BUB = '{valid: 1'b0, data: 16'hDEAD};
  logic clk = 0, rst, en, stall, flush;
  t_t d, q, model;
  int checks = 0, failures = 0;

  pipeline_register #(.T(t_t), .BUBBLE(BUB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 1; stall = 0; flush = 0; d = '0;
    @(posedge clk); #1;
    checks++; if (q !== BUB) begin failures++; $display("reset %h", q); end
    rst = 0; model = BUB;
    for (int i = 0; i < 500; i++) begin
      en = $urandom_range(0, 4) != 0; stall = $urandom_range(0, 3) == 0; flush = $urandom_range(0, 4) == 0;
      d = '{valid: 1'b1, data: 16'($urandom)};
      @(posedge clk);
      if (en) model = flush ? BUB : (stall ? model : d);
      #1;
      checks++; if (q !== model) begin failures++; $display("i %0d q %h exp %h", i, q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
