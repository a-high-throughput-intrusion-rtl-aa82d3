// uart_byte_sink: testbench UART receiver.  Watches an 8N1 line clocked at
// CLKS_PER_BIT clocks of clk per bit and pulses valid for one clock with each
// received byte, so a testbench can collect everything the sniffer sends,
// solicited or not.  A frame with a low stop bit raises frame_err with it.
module uart_byte_sink #(
  parameter int CLKS_PER_BIT = 87
) (
  input  logic       clk,
  input  logic       line,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);
  initial begin
    valid = 0; data = 0; frame_err = 0;
    forever begin
      @(posedge clk);
      valid = 0;
      if (line == 0) begin
        repeat (CLKS_PER_BIT / 2) @(posedge clk);
        if (line == 0) begin
          for (int i = 0; i < 8; i++) begin
            repeat (CLKS_PER_BIT) @(posedge clk);
            data[i] = line;
          end
          repeat (CLKS_PER_BIT) @(posedge clk);
          frame_err = (line != 1);
          valid = 1;
        end
      end
    end
  end
endmodule
