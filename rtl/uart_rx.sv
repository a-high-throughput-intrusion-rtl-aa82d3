// uart_rx: 8N1 UART receiver.  The line is synchronised, a falling edge starts
// a character, each bit is sampled in the middle of its CLKS_PER_BIT-clock
// period, data bits come LSB first.  rx_valid pulses for one clock with rx_byte
// after the middle of the stop bit; a character whose stop bit is low is
// dropped.  The idle line is high.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 87     // 10 MHz / 115200 baud
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       rx_valid,
  output logic [7:0] rx_byte
);
  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rstate_e;

  rstate_e     state;
  logic        rx_s, rx_m;
  logic [15:0] cnt;
  logic [2:0]  bit_i;
  logic [7:0]  shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {rx_s, rx_m} <= 2'b11;
    else        {rx_s, rx_m} <= {rx_m, rx};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= R_IDLE;
      cnt      <= '0;
      bit_i    <= '0;
      shreg    <= '0;
      rx_valid <= 1'b0;
      rx_byte  <= '0;
    end else begin
      rx_valid <= 1'b0;
      unique case (state)
        R_IDLE: if (!rx_s) begin
          state <= R_START;
          cnt   <= '0;
        end
        R_START: begin
          if (cnt == 16'((CLKS_PER_BIT - 1) / 2)) begin
            cnt   <= '0;
            bit_i <= '0;
            state <= rx_s ? R_IDLE : R_DATA;   // glitch: back to idle
          end else cnt <= cnt + 16'd1;
        end
        R_DATA: begin
          if (cnt == 16'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {rx_s, shreg[7:1]};
            bit_i <= bit_i + 3'd1;
            if (bit_i == 3'd7) state <= R_STOP;
          end else cnt <= cnt + 16'd1;
        end
        R_STOP: begin
          if (cnt == 16'(CLKS_PER_BIT - 1)) begin
            state    <= R_IDLE;
            rx_valid <= rx_s;
            rx_byte  <= shreg;
          end else cnt <= cnt + 16'd1;
        end
      endcase
    end
  end
endmodule
