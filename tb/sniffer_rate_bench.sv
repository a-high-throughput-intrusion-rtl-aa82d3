// sniffer_rate_bench: one packet sniffer and the stimulus of the data-rate
// experiment, for use by tb_sniffer_data_rate.  After one rule allowing UDP is
// loaded over the UART, streams of UDP frames of every length in LENS are sent
// with every inter-frame gap N_DELAY in DELAYS (clocks with no beat between
// frames; the MAC's own gap is not modelled, N_MAC = 0).  For each point it
// measures the data rate seen at the MAC interface, 8 * bytes / (clocks * T_CLK),
// and checks that every frame got a result (all allowed) unless frames follow
// each other faster than the rules check can take them (fewer than DEPTH
// clocks per frame), in which case check_overrun must flag the lost ones.
module sniffer_rate_bench #(
  parameter int  BYTES = 8,
  parameter real T_CLK_NS = 6.4,
  parameter int  N_LENS = 9,
  parameter int  LENS [N_LENS] = '{50, 100, 200, 300, 400, 500, 750, 1000, 1500}
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import ids_pkg::*;
  import tb_eth_pkg::*;
  localparam int CPB = 8, DEPTH = 4;
  localparam int N_DELAYS = 14;
  localparam int DELAYS [N_DELAYS] = '{0, 1, 2, 3, 4, 5, 10, 50, 100, 500, 1000, 5000, 10000, 50000};

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
  int results = 0, allowed = 0, overruns = 0;

  // the 10G MAC flags a good frame with MAC_RX_USER high on the last beat,
  // the 100G MAC with MAC_RX_USER low
  localparam bit USER_GOOD = (BYTES == 8);

  packet_sniffer_top #(.BYTES(BYTES), .CLKS_PER_BIT(CPB), .RX_USER_GOOD(USER_GOOD)) dut (.*);

  always #(T_CLK_NS / 2) mac_rx_clk = ~mac_rx_clk;
  always #50 uart_clk = ~uart_clk;

  always @(posedge mac_rx_clk) if (rst_n) begin
    if (out_result) results++;
    if (out_result && fw_result == FW_ALLOWED) allowed++;
    if (check_overrun) overruns++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL [%0d-byte beats] %s at %0t", BYTES, what, $time);
    end
  endtask

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

  initial begin
    logic [223:0] w;
    checks = 0; failures = 0; done = 0;
    repeat (4) @(posedge uart_clk);
    rst_n = 1;
    repeat (4) @(posedge uart_clk);
    w = make_rule(1'b1, 1'b0, 1'b0, 16'h0800, 8'd17, 32'h0, 32'h0, 32'h0, 32'h0,
                  16'd0, 16'hffff, 16'd0, 16'hffff);
    send_byte(8'h57); send_byte(8'h00);
    for (int i = 27; i >= 0; i--) send_byte(w[8*i +: 8]);
    repeat (40 * CPB) @(posedge uart_clk);

    foreach (LENS[li]) begin
      frame_desc_t d;
      bytes_t q;
      int nb;
      d = default_desc();
      d.proto = 8'd17;
      d.payload = (LENS[li] > 42) ? LENS[li] - 42 : 0;
      q = build_ipv4(d);
      nb = (q.size() + BYTES - 1) / BYTES;
      foreach (DELAYS[di]) begin
        int n_frames, r0, ov0;
        realtime c0, c1;
        real rate, word_rate, formula;
        n_frames = (DELAYS[di] <= 100) ? 16 : 2;
        r0 = results; ov0 = overruns;
        @(negedge mac_rx_clk);
        c0 = $realtime;
        for (int f = 0; f < n_frames; f++) begin
          for (int b = 0; b < nb; b++) begin
            mac_rx_valid = 1;
            mac_rx_data = '0; mac_rx_keep = '0;
            for (int k = 0; k < BYTES; k++)
              if (b * BYTES + k < q.size()) begin
                mac_rx_data[8*k +: 8] = q[b*BYTES + k];
                mac_rx_keep[k] = 1;
              end
            mac_rx_last = (b == nb - 1);
            mac_rx_user = (b == nb - 1) ? USER_GOOD : 1'b0;
            @(negedge mac_rx_clk);
          end
          mac_rx_valid = 0; mac_rx_last = 0; mac_rx_user = 0;
          repeat (DELAYS[di]) @(negedge mac_rx_clk);
        end
        c1 = $realtime;
        // bits per ns = Gbit/s; word_rate counts whole beats as the formula does
        rate      = 8.0 * q.size() * n_frames / (c1 - c0);
        word_rate = 8.0 * BYTES * nb * n_frames / (c1 - c0);
        formula   = 8.0 * BYTES * nb / ((nb + DELAYS[di]) * T_CLK_NS);
        check(word_rate > 0.999 * formula && word_rate < 1.001 * formula,
              "stream accepted at the full beat rate");
        repeat (20) @(negedge mac_rx_clk);
        if (DELAYS[di] <= 5 || DELAYS[di] == 100 || DELAYS[di] == 50000)
          $display("[%0d-byte beats] frame %0d B (%0d beats), N_DELAY %0d: %.3f Gbit/s of frame data, DR formula %.3f Gbit/s",
                   BYTES, q.size(), nb, DELAYS[di], rate, formula);
        if (nb + DELAYS[di] >= DEPTH) begin
          check(results - r0 == n_frames, "every frame checked");
          check(overruns == ov0, "no overrun");
        end else begin
          check(results - r0 + overruns - ov0 == n_frames, "every frame checked or flagged");
          check(overruns > ov0, "overrun flagged when frames outpace the check");
        end
      end
    end
    check(allowed == results, "all UDP frames allowed");
    done = 1;
  end
endmodule
