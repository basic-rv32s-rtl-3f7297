// register_file: the 32 x 32-bit integer registers x0..x31.
// Two asynchronous read ports (ra1/rd1, ra2/rd2) used in ID, one synchronous
// write port (wa/wd, reg_write) driven from WB. x0 reads as zero and is never
// written. A write and a read of the same register in the same cycle return
// the new value (write-through), which is the WB-to-ID forwarding path.
// Port names follow the core diagram (RA1, RA2, WA, RD1, RD2, RF_WD,
// RegWrite); the write-through and the reset of all registers to zero are
// this design's choices.
module register_file (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        reg_write,
  input  logic [4:0]  wa,
  input  logic [31:0] wd,
  input  logic [4:0]  ra1,
  input  logic [4:0]  ra2,
  output logic [31:0] rd1,
  output logic [31:0] rd2
);
  logic [31:0] regs [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (en && reg_write && wa != 5'd0) begin
      regs[wa] <= wd;
    end
  end

  always_comb begin
    rd1 = (ra1 == 5'd0) ? '0 : regs[ra1];
    rd2 = (ra2 == 5'd0) ? '0 : regs[ra2];
    if (reg_write && wa != 5'd0 && wa == ra1) rd1 = wd;
    if (reg_write && wa != 5'd0 && wa == ra2) rd2 = wd;
  end
endmodule
