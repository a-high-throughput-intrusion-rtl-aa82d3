// tb_mac_rx_controller: drives random AXI-stream beats (random gaps, frame
// lengths, keep and user bits) into the MAC RX controller and checks every
// clock that FW_ENABLE/FW_DATA/FW_KEEP/FW_LAST are the previous clock's beat,
// LINE_NUMBER is the beat index within its frame, FW_OUT pulses exactly one
// clock after the last beat and fw_frame_ok reports MAC_RX_USER of that beat.
module tb_mac_rx_controller;
  localparam int BYTES = 8;
  logic clk = 0, rst_n = 0;
  logic mac_rx_valid = 0, mac_rx_last = 0, mac_rx_user = 0;
  logic [8*BYTES-1:0] mac_rx_data = '0;
  logic [BYTES-1:0]   mac_rx_keep = '0;
  logic fw_enable, fw_last, fw_out, fw_frame_ok;
  logic [15:0] line_number;
  logic [8*BYTES-1:0] fw_data;
  logic [BYTES-1:0] fw_keep;
  int checks = 0, failures = 0, frames = 0;

  mac_rx_controller #(.BYTES(BYTES)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx = 0;
    bit p_end = 0, p_user = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      mac_rx_valid = ($urandom_range(0, 9) < 7);
      mac_rx_data  = {$urandom, $urandom};
      mac_rx_keep  = $urandom;
      mac_rx_last  = ($urandom_range(0, 9) < 2);
      mac_rx_user  = $urandom;
      @(posedge clk);
      #1;
      // outputs now show the beat sampled at this edge
      check(fw_enable == mac_rx_valid, "fw_enable");
      check(fw_data == (mac_rx_valid ? mac_rx_data : '0), "fw_data");
      check(fw_keep == (mac_rx_valid ? mac_rx_keep : '0), "fw_keep");
      check(fw_last == (mac_rx_valid && mac_rx_last), "fw_last");
      check(line_number == (mac_rx_valid ? 16'(idx) : 16'd0), "line_number");
      check(fw_out == p_end, "fw_out one clock after the last beat");
      if (p_end) check(fw_frame_ok == p_user, "fw_frame_ok");
      if (fw_out) frames++;
      p_end  = mac_rx_valid && mac_rx_last;
      p_user = mac_rx_user;
      if (mac_rx_valid) idx = mac_rx_last ? 0 : idx + 1;
    end
    check(frames > 100, "enough frames seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
