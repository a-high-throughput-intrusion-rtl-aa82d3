// packet_sniffer_top: a stateless, whitelist-based Ethernet packet sniffer
// (intrusion detection system) for a 10 Gbit/s link.
//
// Receive path, all on the MAC receive clock (156.25 MHz at 10G):
//   MAC AXI-stream -> mac_rx_controller -> frame_analysis -> fw_rules_check
//   -> statistics_generator.
// The rules check reads fw_rules_memory (4 banks x 4 rules of 224 bits); the
// memory is written, the statistics are read and rule-violation alerts are
// sent by uart_controller on the 10 MHz UART clock.  The Ethernet subsystem (transceiver, PCS, MAC) is not
// part of this RTL: its receive AXI-stream is this module's mac_rx_* input.
//
// Timing: with a frame's last beat on mac_rx_* at clock L, fw_out is at L+2,
// the header parameters are valid at L+3 and OUT_RESULT with FW_RESULT and
// PACKET_TYPE pulses at L+4+DEPTH (L+8 with the default 4 x 4 rules); the
// statistics count it one clock later.  One beat can be taken every clock, no
// back-pressure; a frame must last at least DEPTH beats, else check_overrun
// flags a frame that went unchecked.
//
// The block structure and the signal names follow the published schematic of
// the sniffer; the beat width is a parameter (BYTES = 8 for 10G, 64 for the
// 100G variant).  The rest is described in each block.
module packet_sniffer_top
  import ids_pkg::*;
#(
  parameter int unsigned BYTES        = 8,    // 64-bit MAC data path
  parameter int unsigned N_BANKS      = 4,    // rule block RAMs
  parameter int unsigned DEPTH        = 4,    // rules per block RAM
  parameter int unsigned CLKS_PER_BIT = 87,   // UART: 10 MHz / 115200 baud
  parameter bit          RX_USER_GOOD = 1'b1
) (
  // Ethernet subsystem receive stream (MAC_RX_CLK = FW_CLK)
  input  logic                mac_rx_clk,
  input  logic                rst_n,          // asynchronous, both domains
  input  logic                mac_rx_valid,
  input  logic [8*BYTES-1:0]  mac_rx_data,
  input  logic [BYTES-1:0]    mac_rx_keep,
  input  logic                mac_rx_last,
  input  logic                mac_rx_user,
  // UART
  input  logic                uart_clk,       // UART_CLK_10MHz
  input  logic                uart_rx,
  output logic                uart_tx,
  // rules check result, for monitoring
  output fw_result_e          fw_result,
  output pkt_type_e           packet_type,
  output logic                out_result,
  output logic                check_overrun,
  output frame_params_t       frame_params,
  output logic                frame_params_valid,
  output stats_t              stats
);

  localparam int unsigned N_RULES = N_BANKS * DEPTH;
  localparam int unsigned RA_W    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic fw_rst_n, uart_rst_n;
  reset_sync u_rst_fw   (.clk(mac_rx_clk), .arst_n(rst_n), .rst_n_out(fw_rst_n));
  reset_sync u_rst_uart (.clk(uart_clk),   .arst_n(rst_n), .rst_n_out(uart_rst_n));

  // MAC RX controller -> frame analysis
  logic               fw_enable, fw_last, fw_out, fw_frame_ok;
  logic [15:0]        line_number;
  logic [8*BYTES-1:0] fw_data;
  logic [BYTES-1:0]   fw_keep;

  mac_rx_controller #(.BYTES(BYTES), .RX_USER_GOOD(RX_USER_GOOD)) u_mac_rx (
    .clk(mac_rx_clk), .rst_n(fw_rst_n),
    .mac_rx_valid, .mac_rx_data, .mac_rx_keep, .mac_rx_last, .mac_rx_user,
    .fw_enable, .line_number, .fw_data, .fw_keep, .fw_last, .fw_out, .fw_frame_ok);

  frame_analysis #(.BYTES(BYTES)) u_analysis (
    .clk(mac_rx_clk), .rst_n(fw_rst_n),
    .fw_enable, .line_number, .fw_data, .fw_keep, .fw_out, .fw_frame_ok,
    .params(frame_params), .params_valid(frame_params_valid));

  // rules memory and check
  logic                           rd_en;
  logic [RA_W-1:0]                rd_addr;
  logic [N_BANKS-1:0][RULE_W-1:0] rd_data;
  logic                           rule_wr_en;
  logic [$clog2(N_RULES)-1:0]     rule_wr_addr;
  logic [RULE_W-1:0]              rule_wr_data;

  fw_rules_memory #(.N_BANKS(N_BANKS), .DEPTH(DEPTH), .RULE_W(RULE_W)) u_rules_mem (
    .wr_clk(uart_clk), .wr_en(rule_wr_en), .wr_addr(rule_wr_addr), .wr_data(rule_wr_data),
    .rd_clk(mac_rx_clk), .rd_en, .rd_addr, .rd_data);

  fw_rules_check #(.N_BANKS(N_BANKS), .DEPTH(DEPTH)) u_rules_check (
    .clk(mac_rx_clk), .rst_n(fw_rst_n),
    .params(frame_params), .params_valid(frame_params_valid),
    .rd_en, .rd_addr, .rd_data,
    .fw_result, .packet_type, .out_result, .overrun(check_overrun));

  // statistics and UART
  logic   snap_req_tgl, snap_ack_tgl, clear_tgl, alert_tgl, alert_ack_tgl;
  stats_t snapshot;

  statistics_generator u_stats (
    .clk(mac_rx_clk), .rst_n(fw_rst_n),
    .out_result, .fw_result, .packet_type,
    .snap_req_tgl, .snap_ack_tgl, .clear_tgl, .alert_tgl, .alert_ack_tgl, .stats, .snapshot);

  uart_controller #(.CLKS_PER_BIT(CLKS_PER_BIT), .N_RULES(N_RULES)) u_uart (
    .clk(uart_clk), .rst_n(uart_rst_n), .uart_rx, .uart_tx,
    .rule_wr_en, .rule_wr_addr, .rule_wr_data,
    .snap_req_tgl, .snap_ack_tgl, .snapshot, .clear_tgl, .alert_tgl, .alert_ack_tgl);

  // fw_last is part of the FW bus; the analysis works from LINE_NUMBER and
  // FW_OUT.  It is checked here against FW_OUT.
  property p_out_after_last;
    @(posedge mac_rx_clk) disable iff (!rst_n || !fw_rst_n) fw_out |-> $past(fw_last);
  endproperty
  assert property (p_out_after_last);

endmodule
