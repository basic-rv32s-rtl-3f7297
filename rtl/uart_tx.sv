// uart_tx: UART transmitter, 8 data bits, no parity, 1 stop bit (8N1),
// least significant bit first, line idle high.
// A one-cycle tx_start while tx_busy is low latches tx_data; tx_busy rises
// on the next clock and falls after the stop bit. Every bit lasts
// CLKS_PER_BIT clocks, so a byte takes 10 * CLKS_PER_BIT clocks.
// The paper names the block and its ports (tx_start, tx_data, tx, tx_busy);
// 115,200 baud at the 50 MHz system clock (CLKS_PER_BIT = 434) is this
// design's choice.
module uart_tx #(
  parameter int CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       tx_start,
  input  logic [7:0] tx_data,
  output logic       tx,
  output logic       tx_busy
);
  localparam int CW = $clog2(CLKS_PER_BIT);

  logic [9:0]    shifter;   // {stop, data[7:0], start}
  logic [3:0]    bit_idx;
  logic [CW-1:0] clk_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      shifter <= '1;
      bit_idx <= '0;
      clk_cnt <= '0;
      tx_busy <= 1'b0;
    end else if (!tx_busy) begin
      if (tx_start) begin
        shifter <= {1'b1, tx_data, 1'b0};
        bit_idx <= '0;
        clk_cnt <= '0;
        tx_busy <= 1'b1;
      end
    end else if (clk_cnt == CW'(CLKS_PER_BIT - 1)) begin
      clk_cnt <= '0;
      shifter <= {1'b1, shifter[9:1]};
      if (bit_idx == 4'd9) tx_busy <= 1'b0;
      else                 bit_idx <= bit_idx + 4'd1;
    end else begin
      clk_cnt <= clk_cnt + 1'b1;
    end
  end

  assign tx = tx_busy ? shifter[0] : 1'b1;
endmodule
