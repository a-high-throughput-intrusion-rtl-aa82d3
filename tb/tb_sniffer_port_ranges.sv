// tb_sniffer_port_ranges: the source-port whitelist experiment, run on the
// packet sniffer with every parameter at its default (64-bit beats, 4 x 4
// rules, UART at 87 clocks per bit of the 10 MHz clock, i.e. 115 kbaud).
// Six transmissions of 1024 TCP frames each, source ports 0..1023 in turn; before
// each, one rule allowing TCP source ports 0-3, 0-15, 0-31, 0-63, 0-127 and
// 0-255 respectively is loaded over the UART and the statistics cleared.
// After each the statistics are read over the UART: the allowed count must be
// 4, 16, 32, 64, 128, 256 (0.39 % ... 25 % of the frames) and the rest counted
// as rule violations, and a rule-violation alert must have been sent.  Frames
// are sent with a one-clock gap.
module tb_sniffer_port_ranges;
  import ids_pkg::*;
  import tb_eth_pkg::*;
  localparam int BYTES = 8, CPB = 87, N_FRAMES = 1024;

  logic mac_rx_clk = 0, uart_clk = 0, rst_n = 0;
  logic mac_rx_valid = 0, mac_rx_last = 0, mac_rx_user = 0;
  logic [8*BYTES-1:0] mac_rx_data = '0;
  logic [BYTES-1:0] mac_rx_keep = '0;
  logic uart_rx = 1, uart_tx;
  fw_result_e fw_result;
  pkt_type_e packet_type;
  logic out_result, check_overrun, frame_params_valid;
  frame_params_t frame_params;
  stats_t stats;
  int checks = 0, failures = 0, results = 0, overruns = 0;

  packet_sniffer_top dut (.*);

  always #3.2 mac_rx_clk = ~mac_rx_clk;   // 156.25 MHz
  always #50  uart_clk   = ~uart_clk;     // 10 MHz

  always @(posedge mac_rx_clk) if (rst_n) begin
    if (out_result) results++;
    if (check_overrun) overruns++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #500ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_byte(logic [7:0] b);
    @(posedge uart_clk);
    uart_rx = 0;
    repeat (CPB) @(posedge uart_clk);
    for (int i = 0; i < 8; i++) begin
      uart_rx = b[i];
      repeat (CPB) @(posedge uart_clk);
    end
    uart_rx = 1;
    repeat (CPB) @(posedge uart_clk);
  endtask

  // everything the sniffer sends is collected here; replies are read past
  // any rule-violation alerts ('A') queued in front of them
  logic sink_valid, sink_err;
  logic [7:0] sink_data;
  logic [7:0] rxq[$];
  int n_alerts = 0;
  uart_byte_sink #(.CLKS_PER_BIT(CPB)) u_sink (
    .clk(uart_clk), .line(uart_tx), .valid(sink_valid), .data(sink_data), .frame_err(sink_err));
  always @(posedge uart_clk) if (sink_valid) begin
    rxq.push_back(sink_data);
    check(!sink_err, "UART stop bit");
  end

  task automatic recv_byte(output logic [7:0] b);
    int t;
    t = 0;
    b = 0;
    while (rxq.size() == 0 && t < 2000 * CPB) begin @(posedge uart_clk); t++; end
    check(t < 2000 * CPB, "UART reply");
    if (rxq.size() != 0) b = rxq.pop_front();
  endtask

  task automatic recv_reply(output logic [7:0] b);
    recv_byte(b);
    while (b == 8'h41) begin
      n_alerts++;
      recv_byte(b);
    end
  endtask

  // alerts left after the last reply
  task automatic drain_alerts();
    repeat (40 * CPB) @(posedge uart_clk);
    while (rxq.size() != 0) begin
      logic [7:0] b;
      b = rxq.pop_front();
      check(b == 8'h41, "only alerts outside replies");
      n_alerts++;
    end
  endtask

  task automatic send_frame(bytes_t q);
    int nb = (q.size() + BYTES - 1) / BYTES;
    for (int b = 0; b < nb; b++) begin
      @(negedge mac_rx_clk);
      mac_rx_valid = 1;
      mac_rx_data = '0; mac_rx_keep = '0;
      for (int k = 0; k < BYTES; k++)
        if (b * BYTES + k < q.size()) begin
          mac_rx_data[8*k +: 8] = q[b*BYTES + k];
          mac_rx_keep[k] = 1;
        end
      mac_rx_last = (b == nb - 1);
      mac_rx_user = (b == nb - 1);
    end
    @(negedge mac_rx_clk);
    mac_rx_valid = 0; mac_rx_last = 0; mac_rx_user = 0;
  endtask

  initial begin
    int hi [6] = '{3, 15, 31, 63, 127, 255};
    logic [7:0] b;
    stats_t s;
    int a0;
    repeat (4) @(posedge uart_clk);
    rst_n = 1;
    repeat (4) @(posedge uart_clk);
    for (int run = 0; run < 6; run++) begin
      logic [223:0] w;
      w = make_rule(1'b1, 1'b0, 1'b0, 16'h0800, 8'd6, 32'h0, 32'h0, 32'h0, 32'h0,
                    16'd0, 16'(hi[run]), 16'd0, 16'hffff);
      send_byte(8'h57); send_byte(8'h00);
      for (int i = 27; i >= 0; i--) send_byte(w[8*i +: 8]);
      recv_reply(b);
      check(b == 8'h4B, "rule loaded");
      send_byte(8'h43);
      recv_reply(b);
      check(b == 8'h4B, "statistics cleared");
      results = 0;
      a0 = n_alerts;
      for (int p = 0; p < N_FRAMES; p++) begin
        frame_desc_t d;
        d = default_desc();
        d.sport = 16'(p);
        d.payload = 6;                     // 60-byte frames, 8 beats
        send_frame(build_ipv4(d));
      end
      repeat (20) @(negedge mac_rx_clk);
      send_byte(8'h53);
      recv_reply(b);
      check(b == 8'h53, "statistics header");
      check(n_alerts > a0, "rule-violation alert before the statistics");
      for (int i = 4 * N_STATS - 1; i >= 0; i--) begin
        recv_byte(b);
        s[8*i +: 8] = b;
      end
      $display("run %0d: allowed source ports 0-%0d: pass=%0d rulev=%0d error=%0d (%.3f %% allowed)",
               run + 1, hi[run], s.packet_pass, s.packet_rulev, s.packet_error,
               100.0 * s.packet_pass / N_FRAMES);
      check(results == N_FRAMES, "every frame checked");
      check(s.packet_pass == 32'(hi[run] + 1), "allowed count");
      check(s.packet_rulev == 32'(N_FRAMES - hi[run] - 1), "rule-violation count");
      check(s.packet_error == 0, "no errors");
      check(s.tcp == N_FRAMES, "TCP count");
    end
    check(overruns == 0, "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
