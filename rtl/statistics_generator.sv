// statistics_generator: counts the outcome of every rules check and keeps a
// snapshot of the counters for the UART controller.
//
// On each OUT_RESULT pulse one of packet_error / packet_rulev / packet_pass is
// incremented according to FW_RESULT (1 error, 2 rule violation, 3 allowed),
// and one of tcp / udp / icmp / arp according to PACKET_TYPE (frames of other
// types are counted only by their result).  Counters are 32 bits and wrap.
//
// The UART controller runs on its own clock, so the counters reach it through
// a toggle handshake: each change of snap_req_tgl (synchronised here) copies
// the live counters into `snapshot`, and snap_ack_tgl changes one clock later.
// The snapshot then stays still until the next request, so the UART side can
// read it as soon as it sees the acknowledge.  A change of clear_tgl zeroes the
// live counters; a result arriving on that same clock is lost.
//
// Rule violations also raise an alert for the UART controller: alert_tgl
// changes once for one or more violations, but only while the previous change
// has been acknowledged (alert_ack_tgl, synchronised here, equal to alert_tgl).
// Violations seen while an alert is outstanding are remembered in one pending
// bit and raise the next alert, so alerts are merged but none is lost.
//
// The counters #PACKET_ERROR, #PACKET_RULEV, #PACKET_PASS, #TCP and #UDP are
// those of the published waveforms, ICMP comes from the text; the ARP counter,
// the counting of protocols for every frame whatever its result, the clear
// command and the handshakes are this design's choices.  That the sniffer
// raises an alert on frames matching no rule comes from the published text;
// how it is carried is this design's own.
module statistics_generator
  import ids_pkg::*;
(
  input  logic        clk,          // FW_CLK
  input  logic        rst_n,
  input  logic        out_result,
  input  fw_result_e  fw_result,
  input  pkt_type_e   packet_type,
  // toggle handshakes with the UART clock domain
  input  logic        snap_req_tgl,
  output logic        snap_ack_tgl,
  input  logic        clear_tgl,
  output logic        alert_tgl,    // changes on rule violations
  input  logic        alert_ack_tgl,
  output stats_t      stats,        // live counters
  output stats_t      snapshot      // copy taken on request
);

  logic req_s, req_d, clr_s, clr_d, alack_s, alert_pend, violation;

  assign violation = out_result && (fw_result == FW_BLOCKED);

  sync_2ff u_sync_req (.clk, .rst_n, .d(snap_req_tgl), .q(req_s));
  sync_2ff u_sync_clr (.clk, .rst_n, .d(clear_tgl),    .q(clr_s));
  sync_2ff u_sync_alk (.clk, .rst_n, .d(alert_ack_tgl), .q(alack_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats        <= '0;
      snapshot     <= '0;
      snap_ack_tgl <= 1'b0;
      req_d        <= 1'b0;
      clr_d        <= 1'b0;
      alert_tgl    <= 1'b0;
      alert_pend   <= 1'b0;
    end else begin
      if (alert_tgl == alack_s && (alert_pend || violation)) begin
        alert_tgl  <= ~alert_tgl;
        alert_pend <= 1'b0;
      end else if (violation) begin
        alert_pend <= 1'b1;
      end
      req_d <= req_s;
      clr_d <= clr_s;
      if (clr_s != clr_d) begin
        stats <= '0;
      end else if (out_result) begin
        unique case (fw_result)
          FW_ERROR:   stats.packet_error <= stats.packet_error + 32'd1;
          FW_BLOCKED: stats.packet_rulev <= stats.packet_rulev + 32'd1;
          FW_ALLOWED: stats.packet_pass  <= stats.packet_pass  + 32'd1;
          default: ;
        endcase
        unique case (packet_type)
          PT_TCP:  stats.tcp  <= stats.tcp  + 32'd1;
          PT_UDP:  stats.udp  <= stats.udp  + 32'd1;
          PT_ICMP: stats.icmp <= stats.icmp + 32'd1;
          PT_ARP:  stats.arp  <= stats.arp  + 32'd1;
          default: ;
        endcase
      end
      if (req_s != req_d) begin
        snapshot     <= stats;
        snap_ack_tgl <= ~snap_ack_tgl;
      end
    end
  end

endmodule
