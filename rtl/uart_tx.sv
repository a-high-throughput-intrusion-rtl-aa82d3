// uart_tx: 8N1 UART transmitter.  A tx_start pulse while not busy sends
// tx_byte: one start bit, eight data bits LSB first and one stop bit, each
// CLKS_PER_BIT clocks long.  tx_busy is high from the clock after tx_start to
// the end of the stop bit.  The idle line is high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 87
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_start,
  input  logic [7:0] tx_byte,
  output logic       tx_busy,
  output logic       tx
);
  logic [15:0] cnt;
  logic [3:0]  bit_i;      // 0 start, 1..8 data, 9 stop
  logic [9:0]  frame;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_busy <= 1'b0;
      tx      <= 1'b1;
      cnt     <= '0;
      bit_i   <= '0;
      frame   <= '1;
    end else if (!tx_busy) begin
      tx <= 1'b1;
      if (tx_start) begin
        tx_busy <= 1'b1;
        frame   <= {1'b1, tx_byte, 1'b0};
        tx      <= 1'b0;
        cnt     <= '0;
        bit_i   <= '0;
      end
    end else begin
      if (cnt == 16'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bit_i == 4'd9) begin
          tx_busy <= 1'b0;
          tx      <= 1'b1;
        end else begin
          bit_i <= bit_i + 4'd1;
          tx    <= frame[bit_i + 4'd1];
        end
      end else cnt <= cnt + 16'd1;
    end
  end
endmodule
