// tb_statistics_generator: random results and packet types are counted and
// compared with a model every clock; the snapshot handshake (request toggled
// from a slower, unrelated clock) must return the counters as they were, and
// keep them while counting goes on; the clear toggle must zero the counters.
// Alerts: a model of the UART side acknowledges every alert change some clocks
// later; each alert change must follow at least one rule violation not yet
// alerted, and after the traffic stops every violation must have been alerted.
module tb_statistics_generator;
  import ids_pkg::*;
  logic clk = 0, uclk = 0, rst_n = 0;
  logic out_result = 0;
  fw_result_e fw_result = FW_NONE;
  pkt_type_e packet_type = PT_OTHER;
  logic snap_req_tgl = 0, snap_ack_tgl, clear_tgl = 0;
  logic alert_tgl, alert_ack_tgl = 0;
  int viol_since = 0, alerts = 0;
  logic alert_d = 0;
  stats_t stats, snapshot, model;
  int checks = 0, failures = 0;

  statistics_generator dut (.*);

  always #3.2 clk = ~clk;
  always #50 uclk = ~uclk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic traffic(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      out_result  = $urandom_range(0, 1);
      fw_result   = fw_result_e'($urandom_range(0, 3));
      packet_type = pkt_type_e'($urandom_range(0, 5) % 5);
      if (out_result) begin
        if (fw_result == FW_ERROR)   model.packet_error++;
        if (fw_result == FW_BLOCKED) begin
          model.packet_rulev++;
          viol_since++;
        end
        if (fw_result == FW_ALLOWED) model.packet_pass++;
        if (packet_type == PT_TCP)  model.tcp++;
        if (packet_type == PT_UDP)  model.udp++;
        if (packet_type == PT_ICMP) model.icmp++;
        if (packet_type == PT_ARP)  model.arp++;
      end
      @(posedge clk); #0.1;
      check(stats == model, "live counters");
      if (alert_tgl != alert_d) begin
        alert_d = alert_tgl;
        alerts++;
        check(viol_since > 0, "alert follows a violation");
        viol_since = 0;
      end
    end
    @(negedge clk);
    out_result = 0;
  endtask

  task automatic snap();
    logic a;
    stats_t held;
    a = snap_ack_tgl;
    @(negedge uclk);
    snap_req_tgl = ~snap_req_tgl;
    repeat (10) @(posedge uclk);
    check(snap_ack_tgl != a, "acknowledge toggled");
    check(snapshot == model, "snapshot");
    held = snapshot;
    traffic(50);
    check(snapshot == held, "snapshot holds");
  endtask

  // UART side: acknowledge each alert change after a few of its clocks
  always @(posedge uclk) begin
    if (rst_n && alert_tgl != alert_ack_tgl) begin
      repeat (4) @(posedge uclk);
      alert_ack_tgl <= alert_tgl;
    end
  end

  initial begin
    model = '0;
    repeat (3) @(posedge uclk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      traffic(300);
      snap();
    end
    @(negedge uclk);
    clear_tgl = ~clear_tgl;
    repeat (3) @(posedge uclk);
    model = '0;
    check(stats == '0, "cleared");
    traffic(200);
    snap();
    // quiet: a pending violation must still raise its alert
    repeat (20) @(posedge uclk);
    #0.1;
    if (alert_tgl != alert_d) begin
      alert_d = alert_tgl;
      alerts++;
      viol_since = 0;
    end
    check(viol_since == 0, "every violation alerted");
    check(alerts > 10, "alerts raised");
    check(alert_ack_tgl == alert_tgl, "no alert outstanding");
    $display("alerts: %0d, rule violations since the clear: %0d", alerts, model.packet_rulev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
