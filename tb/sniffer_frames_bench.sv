// sniffer_frames_bench: one packet sniffer fed the frames whose decoded headers
// appear in the published waveforms, for use by tb_sniffer_paper_frames.
//
// Two rules are loaded over the UART at the default 115 kbaud (allow IPv4/TCP,
// allow IPv4/UDP, any address and port).  Then five frames are sent, 40 clocks
// apart: the four frames of the 10 Gbit/s header-analysis waveform (UDP, TCP,
// UDP, TCP, with the MAC addresses, IP addresses, ports and TCP flags printed
// there), and the 88-byte TCP frame of the 100 Gbit/s waveforms.  The printed
// waveforms do not give the lengths of the first four; they end on a beat with
// one valid byte, so 65-byte frames are used here.
//
// Checked for every frame:
//   * each FW bus beat: enable, LINE_NUMBER, keep and FW_LAST;
//   * every decoded header field against the printed values, all checksums
//     reading ffff, and no error flag;
//   * FW_RESULT = 3 (allowed) and PACKET_TYPE 1 for TCP, 2 for UDP;
//   * with the last beat presented in clock L: parameters valid in clock L+3,
//     OUT_RESULT in clock L+4+DEPTH.
// After the first four frames the live counters must read 4 allowed, 2 TCP,
// 2 UDP and no errors or violations, as in the published statistics waveform.
// At the end the counters are read back over the UART and compared, and no
// rule-violation alert may have been sent.
//
// The 10G MAC raises MAC_RX_USER with MAC_RX_LAST on a good frame, while the
// 100G MAC keeps it low on a good frame (both as in the published waveforms).
// The bench drives the user bit that way, and sets RX_USER_GOOD to match.
module sniffer_frames_bench #(
  parameter int  BYTES = 8,
  parameter real T_CLK_NS = 6.4
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import ids_pkg::*;
  import tb_eth_pkg::*;
  localparam int  CPB = 87, DEPTH = 4, N_FRAMES = 5;
  localparam bit  USER_GOOD = (BYTES == 8);

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

  packet_sniffer_top #(.BYTES(BYTES), .RX_USER_GOOD(USER_GOOD)) dut (.*);

  always #(T_CLK_NS / 2) mac_rx_clk = ~mac_rx_clk;
  always #50 uart_clk = ~uart_clk;

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

  // The frames of the published waveforms.
  function automatic frame_desc_t paper_frame(int n);
    frame_desc_t d;
    d = default_desc();
    case (n)
      0: begin d.proto = 8'd17; d.mac_d = 48'hf1647da4fc21; d.mac_s = 48'h000a35027c18;
               d.ip_s = 32'hdb23b240; d.ip_d = 32'h7f52ee1d; d.sport = 16'h0038; d.dport = 16'h008a; end
      1: begin d.proto = 8'd6;  d.mac_d = 48'h65e49c18a6cd; d.mac_s = 48'h74b57835d139;
               d.ip_s = 32'h9ae7711d; d.ip_d = 32'hc02b9dff; d.sport = 16'h0015; d.dport = 16'h056b;
               d.flags = 6'b000010; end
      2: begin d.proto = 8'd17; d.mac_d = 48'ha46178ce9bf3; d.mac_s = 48'h237f937d624c;
               d.ip_s = 32'ha72db54f; d.ip_d = 32'hd9a947d5; d.sport = 16'h005f; d.dport = 16'h0292; end
      3: begin d.proto = 8'd6;  d.mac_d = 48'h94a78cfa84e9; d.mac_s = 48'h7b91c527a07f;
               d.ip_s = 32'he39f1e3f; d.ip_d = 32'h36db86b6; d.sport = 16'h0112; d.dport = 16'h0050;
               d.flags = 6'b000100; end
      // the 88-byte frame of the 100G waveforms; its ports are printed there
      // in decimal (21, 1387) and in hex (0015, 056b) in the 10G waveform
      default: begin d.proto = 8'd6; d.sport = 16'd21; d.dport = 16'd1387; d.flags = 6'b000010; end
    endcase
    // 65-byte frames: 42 header bytes + 23 for UDP, 54 + 11 for TCP; 88-byte
    // TCP frame: 54 + 34
    d.payload = (n == 4) ? 34 : (d.proto == 8'd17 ? 23 : 11);
    return d;
  endfunction

  initial begin
    logic [223:0] w;
    logic [7:0] b;
    stats_t s;
    int n_tcp, n_udp;
    checks = 0; failures = 0; done = 0;
    n_tcp = 0; n_udp = 0;
    repeat (4) @(posedge uart_clk);
    rst_n = 1;
    repeat (4) @(posedge uart_clk);

    for (int r = 0; r < 2; r++) begin
      w = make_rule(1'b1, 1'b0, 1'b0, 16'h0800, (r == 0) ? 8'd6 : 8'd17,
                    32'h0, 32'h0, 32'h0, 32'h0, 16'd0, 16'hffff, 16'd0, 16'hffff);
      send_byte(8'h57); send_byte(8'(r));
      for (int i = 27; i >= 0; i--) send_byte(w[8*i +: 8]);
      recv_reply(b);
      check(b == 8'h4B, "rule write acknowledged");
    end

    for (int n = 0; n < N_FRAMES; n++) begin
      frame_desc_t d;
      bytes_t q;
      int nb, k_params, k_result;
      d = paper_frame(n);
      q = build_ipv4(d);
      check(q.size() == ((n == 4) ? 88 : 65), "frame length");
      nb = (q.size() + BYTES - 1) / BYTES;
      repeat (40) @(negedge mac_rx_clk);
      for (int bt = 0; bt < nb; bt++) begin
        logic [BYTES-1:0] keep;
        keep = '0;
        mac_rx_valid = 1;
        mac_rx_data = '0;
        for (int k = 0; k < BYTES; k++)
          if (bt * BYTES + k < q.size()) begin
            mac_rx_data[8*k +: 8] = q[bt*BYTES + k];
            keep[k] = 1;
          end
        mac_rx_keep = keep;
        mac_rx_last = (bt == nb - 1);
        mac_rx_user = (bt == nb - 1) ? USER_GOOD : 1'b0;
        @(negedge mac_rx_clk);
        // the beat is on the FW bus from the edge that sampled it
        check(dut.fw_enable && dut.line_number == 16'(bt) && dut.fw_keep == keep &&
              dut.fw_last == (bt == nb - 1), "FW bus beat");
      end
      mac_rx_valid = 0; mac_rx_last = 0; mac_rx_user = 0;
      mac_rx_keep = '0; mac_rx_data = '0;

      // k counts edges after the one that sampled the last beat; with the beat
      // presented in clock L, edge k ends clock L+k
      k_params = 0; k_result = 0;
      for (int k = 1; k <= 20; k++) begin
        @(negedge mac_rx_clk);
        if (frame_params_valid) begin
          k_params = k;
          check(frame_params.mac_dest == d.mac_d && frame_params.mac_source == d.mac_s,
                "MAC addresses");
          check(frame_params.lev3_prot == 16'h0800 && frame_params.lev4_prot == d.proto,
                "protocols");
          check(frame_params.ip_source == d.ip_s && frame_params.ip_dest == d.ip_d,
                "IP addresses");
          check(frame_params.source_port == d.sport && frame_params.dest_port == d.dport,
                "ports");
          check(frame_params.ip_chksum == 16'hffff, "IP checksum reads ffff");
          if (d.proto == 8'd6)
            check(frame_params.tcp_chksum == 16'hffff && frame_params.tcp_flags == d.flags,
                  "TCP checksum reads ffff, TCP flags");
          else
            check(frame_params.udp_chksum == 16'hffff, "UDP checksum reads ffff");
          check(!frame_params.lev2_err && !frame_params.lev3_err && !frame_params.lev4_err,
                "no error flag");
          check(frame_params.frame_len == 16'(q.size()), "frame length counted");
        end
        if (out_result) begin
          k_result = k;
          check(fw_result == FW_ALLOWED, "FW_RESULT = 3 (allowed)");
          check(packet_type == ((d.proto == 8'd6) ? PT_TCP : PT_UDP), "PACKET_TYPE");
        end
      end
      check(k_params == 2, "parameters valid in clock L+3");
      check(k_result == 3 + DEPTH, "OUT_RESULT in clock L+4+DEPTH");
      if (d.proto == 8'd6) n_tcp++; else n_udp++;
      if (n == 3)
        check(stats.packet_pass == 4 && stats.tcp == 2 && stats.udp == 2 &&
              stats.packet_error == 0 && stats.packet_rulev == 0,
              "statistics after the four frames: 4 allowed, 2 TCP, 2 UDP");
    end

    send_byte(8'h53);
    recv_reply(b);
    check(b == 8'h53, "statistics header");
    for (int i = 4 * N_STATS - 1; i >= 0; i--) begin
      recv_byte(b);
      s[8*i +: 8] = b;
    end
    check(s.packet_pass == N_FRAMES && s.tcp == 32'(n_tcp) && s.udp == 32'(n_udp) &&
          s.packet_error == 0 && s.packet_rulev == 0 && s.icmp == 0 && s.arp == 0,
          "statistics read over the UART");
    check(!check_overrun, "no overrun");
    drain_alerts();
    check(n_alerts == 0, "no alert: every frame allowed");
    $display("[%0d-byte beats] %0d frames: pass=%0d tcp=%0d udp=%0d error=%0d rulev=%0d",
             BYTES, N_FRAMES, s.packet_pass, s.tcp, s.udp, s.packet_error, s.packet_rulev);
    done = 1;
  end
endmodule
