// tb_packet_sniffer_top: end-to-end test of the packet sniffer.  Rules are
// loaded over the UART, a stream of TCP, UDP, ICMP, ARP and non-IP frames is
// sent on the MAC receive stream (back-to-back and with gaps, some with
// corrupted IPv4 or L4 checksums or a bad MAC status), every OUT_RESULT is
// compared with a whitelist model and its latency from the last beat checked,
// the statistics are read back over the UART and compared, then cleared; the
// rules are replaced and the stream re-checked; finally frames shorter than
// the check time are sent back-to-back to provoke a check overrun.  Everything
// sent on the UART is collected; rule-violation alerts must appear, only
// between replies, and never more often than violations.  The UART
// runs at 8 clocks per bit to keep the simulation short.
module tb_packet_sniffer_top;
  import ids_pkg::*;
  import tb_eth_pkg::*;
  localparam int BYTES = 8, DEPTH = 4, CPB = 8;

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
  int checks = 0, failures = 0;

  packet_sniffer_top #(.BYTES(BYTES), .DEPTH(DEPTH), .CLKS_PER_BIT(CPB)) dut (.*);

  always #3.2 mac_rx_clk = ~mac_rx_clk;   // 156.25 MHz
  always #50  uart_clk   = ~uart_clk;     // 10 MHz

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ rule model
  typedef struct {
    bit [15:0] l3; bit any4; bit [7:0] l4;
    bit [31:0] ips, ipsm;
    bit [15:0] slo, shi, dlo, dhi;
  } rule_t;
  rule_t rules[$];

  function automatic bit allowed(bit [15:0] l3, bit [7:0] l4, bit [31:0] ips, bit [15:0] sp, bit [15:0] dp);
    foreach (rules[i])
      if (rules[i].l3 == l3 && (rules[i].any4 || rules[i].l4 == l4) &&
          ((ips ^ rules[i].ips) & rules[i].ipsm) == 0 &&
          sp >= rules[i].slo && sp <= rules[i].shi && dp >= rules[i].dlo && dp <= rules[i].dhi)
        return 1;
    return 0;
  endfunction

  // ------------------------------------------------------------ UART
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

  int n_rule_loads = 0, n_stats_reads = 0, n_clears = 0;

  task automatic load_rule(int idx, bit valid, rule_t r);
    logic [223:0] w;
    logic [7:0] k;
    w = make_rule(valid, 1'b0, r.any4, r.l3, r.l4, r.ips, r.ipsm, 32'h0, 32'h0,
                  r.slo, r.shi, r.dlo, r.dhi);
    send_byte(8'h57);
    send_byte(8'(idx));
    for (int i = 27; i >= 0; i--) send_byte(w[8*i +: 8]);
    recv_reply(k);
    check(k == 8'h4B, "rule load acknowledged");
    n_rule_loads++;
  endtask

  task automatic read_stats(output stats_t s);
    logic [7:0] b;
    send_byte(8'h53);
    recv_reply(b);
    check(b == 8'h53, "statistics header");
    for (int i = 4 * N_STATS - 1; i >= 0; i--) begin
      recv_byte(b);
      s[8*i +: 8] = b;
    end
    n_stats_reads++;
  endtask

  task automatic clear_stats();
    logic [7:0] b;
    send_byte(8'h43);
    recv_reply(b);
    check(b == 8'h4B, "clear acknowledged");
    n_clears++;
  endtask

  // ------------------------------------------------------------ MAC stream
  typedef struct { fw_result_e res; pkt_type_e pt; longint due; } exp_t;
  exp_t expq[$];
  stats_t model;
  longint cyc = 0;
  int n_allowed = 0, n_blocked = 0, n_err2 = 0, n_err3 = 0, n_err4 = 0;
  int n_tcp = 0, n_udp = 0, n_icmp = 0, n_arp = 0, n_b2b = 0, n_overrun = 0;
  bit track = 1;
  always @(posedge mac_rx_clk) cyc <= cyc + 1;

  always @(posedge mac_rx_clk) begin
    #0.1;
    if (check_overrun) n_overrun++;
    if (out_result && track) begin
      exp_t e;
      if (expq.size() == 0) check(0, "unexpected OUT_RESULT");
      else begin
        e = expq.pop_front();
        check(fw_result == e.res, "FW_RESULT");
        check(packet_type == e.pt, "PACKET_TYPE");
        check(cyc == e.due, "result latency: last beat + 4 + DEPTH");
      end
    end
  end

  task automatic send_frame(bytes_t q, bit good, int gap);
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
      mac_rx_user = (b == nb - 1) ? good : 1'b0;
    end
    // the last beat is on the bus in clock cyc; its result comes 4 + DEPTH later
    if (track) expq[$].due = cyc + 4 + DEPTH;
    for (int g = 0; g < gap; g++) begin
      @(negedge mac_rx_clk);
      mac_rx_valid = 0; mac_rx_last = 0; mac_rx_user = 0;
    end
    if (gap == 0) n_b2b++;
  endtask

  task automatic expect_frame(fw_result_e res, pkt_type_e pt);
    exp_t e;
    e.res = res; e.pt = pt; e.due = 0;
    expq.push_back(e);
    if (res == FW_ERROR)   model.packet_error++;
    if (res == FW_BLOCKED) model.packet_rulev++;
    if (res == FW_ALLOWED) model.packet_pass++;
    if (pt == PT_TCP)  model.tcp++;
    if (pt == PT_UDP)  model.udp++;
    if (pt == PT_ICMP) model.icmp++;
    if (pt == PT_ARP)  model.arp++;
  endtask

  task automatic random_traffic(int n);
    for (int i = 0; i < n; i++) begin
      frame_desc_t d;
      bytes_t q;
      bit good, ok;
      int kind;
      pkt_type_e pt;
      fw_result_e res;
      kind = $urandom_range(0, 9);
      d = default_desc();
      d.ip_s = ($urandom_range(0, 1) ? 32'h0a000000 : 32'hc0a80000) | ($urandom & 32'hffff);
      d.sport = $urandom_range(0, 9);
      d.dport = $urandom_range(0, 1) ? 16'd53 : 16'($urandom);
      d.payload = $urandom_range(0, 200);
      d.bad_ip_csum = ($urandom_range(0, 15) == 0);
      d.bad_l4_csum = ($urandom_range(0, 15) == 0);
      good = ($urandom_range(0, 15) != 0);
      if (kind <= 7) begin
        d.proto = (kind <= 3) ? 8'd6 : (kind <= 6) ? 8'd17 : 8'd1;
        q = build_ipv4(d);
        pt = (kind <= 3) ? PT_TCP : (kind <= 6) ? PT_UDP : PT_ICMP;
        ok = allowed(16'h0800, d.proto, d.ip_s, (d.proto == 8'd1) ? 16'd0 : d.sport,
                     (d.proto == 8'd1) ? 16'd0 : d.dport);
        res = ok ? FW_ALLOWED : FW_BLOCKED;
        if (d.bad_l4_csum) begin res = FW_ERROR; n_err4++; end
        if (d.bad_ip_csum) begin res = FW_ERROR; n_err3++; end
      end else if (kind == 8) begin
        q = build_arp(d.mac_s, d.ip_s, d.ip_d);
        pt = PT_ARP;
        res = allowed(16'h0806, 8'd0, d.ip_s, 16'd0, 16'd0) ? FW_ALLOWED : FW_BLOCKED;
      end else begin
        q = build_arp(d.mac_s, d.ip_s, d.ip_d);
        q[12] = 8'h88; q[13] = 8'hb5;
        pt = PT_OTHER;
        res = FW_BLOCKED;
      end
      if (!good) begin res = FW_ERROR; n_err2++; end
      case (res) FW_ALLOWED: n_allowed++; FW_BLOCKED: n_blocked++; default: ; endcase
      case (pt) PT_TCP: n_tcp++; PT_UDP: n_udp++; PT_ICMP: n_icmp++; PT_ARP: n_arp++; default: ; endcase
      expect_frame(res, pt);
      send_frame(q, good, ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(1, 6));
    end
    repeat (20) @(negedge mac_rx_clk);
    check(expq.size() == 0, "every frame got a result");
  endtask

  task automatic compare_stats(string what);
    stats_t s;
    read_stats(s);
    check(s == model, what);
    check(stats == model, {what, " (live)"});
  endtask

  initial begin
    rule_t r;
    model = '0;
    repeat (4) @(posedge uart_clk);
    rst_n = 1;
    repeat (4) @(posedge uart_clk);

    // rule set 1: TCP source ports 0-3; UDP from 10/8 to port 53; ARP
    r = '{l3: 16'h0800, any4: 0, l4: 8'd6, ips: 0, ipsm: 0, slo: 0, shi: 3, dlo: 0, dhi: 16'hffff};
    rules.push_back(r); load_rule(0, 1, r);
    r = '{l3: 16'h0800, any4: 0, l4: 8'd17, ips: 32'h0a000000, ipsm: 32'hff000000,
          slo: 0, shi: 16'hffff, dlo: 53, dhi: 53};
    rules.push_back(r); load_rule(5, 1, r);
    r = '{l3: 16'h0806, any4: 1, l4: 8'd0, ips: 0, ipsm: 0, slo: 0, shi: 0, dlo: 0, dhi: 0};
    rules.push_back(r); load_rule(15, 1, r);

    random_traffic(300);
    compare_stats("statistics after rule set 1");

    clear_stats();
    model = '0;
    repeat (20) @(negedge mac_rx_clk);
    compare_stats("statistics after clear");

    // rule set 2: replace: TCP source ports 0-7 any source; ICMP allowed; ARP rule removed
    rules.delete();
    r = '{l3: 16'h0800, any4: 0, l4: 8'd6, ips: 0, ipsm: 0, slo: 0, shi: 7, dlo: 0, dhi: 16'hffff};
    rules.push_back(r); load_rule(0, 1, r);
    r = '{l3: 16'h0800, any4: 0, l4: 8'd1, ips: 0, ipsm: 0, slo: 0, shi: 0, dlo: 0, dhi: 0};
    rules.push_back(r); load_rule(5, 1, r);
    load_rule(15, 0, r);      // invalidate

    random_traffic(300);
    compare_stats("statistics after rule set 2");

    // overrun: 2-beat frames back to back, shorter than the 4-clock check
    track = 0;
    begin
      int ov0, res0;
      bytes_t q;
      ov0 = n_overrun;
      for (int i = 0; i < 16; i++) q.push_back(8'(i));
      for (int i = 0; i < 10; i++) send_frame(q, 1'b1, 0);
      repeat (20) @(negedge mac_rx_clk);
      check(n_overrun > ov0, "check overrun flagged for frames shorter than the check");
    end

    drain_alerts();
    $display("allowed=%0d blocked=%0d l2err=%0d l3err=%0d l4err=%0d tcp=%0d udp=%0d icmp=%0d arp=%0d",
             n_allowed, n_blocked, n_err2, n_err3, n_err4, n_tcp, n_udp, n_icmp, n_arp);
    $display("back-to-back=%0d rule_loads=%0d stats_reads=%0d clears=%0d overruns=%0d alerts=%0d",
             n_b2b, n_rule_loads, n_stats_reads, n_clears, n_overrun, n_alerts);
    check(n_allowed > 0, "allowed frames seen");
    check(n_blocked > 0, "blocked frames seen");
    check(n_err2 > 0 && n_err3 > 0 && n_err4 > 0, "L2, L3 and L4 errors seen");
    check(n_tcp > 0 && n_udp > 0 && n_icmp > 0 && n_arp > 0, "all protocols seen");
    check(n_b2b > 0, "back-to-back frames seen");
    check(n_rule_loads > 0 && n_stats_reads > 0 && n_clears > 0, "UART commands used");
    check(n_overrun > 0, "overrun seen");
    check(n_alerts > 0 && n_alerts <= n_blocked, "rule-violation alerts sent, at most one per violation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
