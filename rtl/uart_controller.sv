// uart_controller: the sniffer's link to the PC.  It loads whitelist rules
// into the rules memory and sends the statistics counters back.
//
// It runs on the 10 MHz UART clock, 8N1 at CLKS_PER_BIT clocks per bit
// (87 gives 115 kbaud, the rate the published system uses on its UART).
// Commands, one byte each, followed by their arguments:
//   'W' (0x57), index, 28 rule bytes  write rule `index` (taken modulo the
//                                      number of rules); the rule word is sent
//                                      most significant byte first.  Reply 'K'.
//   'S' (0x53)                         send 'S' and then the statistics: the
//                                      counters of ids_pkg::stats_t in
//                                      declaration order, 4 bytes each, most
//                                      significant first.
//   'C' (0x43)                         clear the statistics.  Reply 'K'.
// Other bytes are ignored while idle.  When no command is in progress and a
// rule violation has been reported (alert_tgl differs from alert_ack_tgl), the
// controller sends the alert byte 'A' (0x41) and acknowledges by copying
// alert_tgl into alert_ack_tgl; violations in between are merged into one
// alert.  Alerts never split a reply, and the 'S' header tells the PC where a
// statistics reply starts.  For 'S' the controller toggles
// snap_req_tgl, waits for snap_ack_tgl (from the frame clock domain, synchronised
// here) to change, then sends the snapshot, which the statistics block holds
// still until the next request.  A rule is written into the rules memory in a
// single clock (rule_wr_en) after its last byte; the memory's write port is in
// this clock domain.
//
// That rules are loaded, statistics read and alerts raised over the UART comes
// from the published design; the command set, byte order, alert byte and
// replies are this design's choices.
module uart_controller
  import ids_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 87,
  parameter int unsigned N_RULES      = 16,
  localparam int unsigned IDX_W       = $clog2(N_RULES)
) (
  input  logic              clk,            // UART_CLK_10MHz
  input  logic              rst_n,
  input  logic              uart_rx,
  output logic              uart_tx,
  // rules memory write port
  output logic              rule_wr_en,
  output logic [IDX_W-1:0]  rule_wr_addr,
  output logic [RULE_W-1:0] rule_wr_data,
  // statistics handshake (to and from the frame clock domain)
  output logic              snap_req_tgl,
  input  logic              snap_ack_tgl,
  input  stats_t            snapshot,
  output logic              clear_tgl,
  // rule-violation alerts (from and to the frame clock domain)
  input  logic              alert_tgl,
  output logic              alert_ack_tgl
);

  localparam logic [7:0] CMD_WRITE = 8'h57;
  localparam logic [7:0] CMD_STATS = 8'h53;
  localparam logic [7:0] CMD_CLEAR = 8'h43;
  localparam logic [7:0] REPLY_OK  = 8'h4B;
  localparam logic [7:0] ALERT     = 8'h41;
  localparam int unsigned RULE_BYTES  = RULE_W / 8;
  localparam int unsigned STATS_BYTES = N_STATS * 4 + 1;   // header + counters

  typedef enum logic [2:0] {C_IDLE, C_INDEX, C_RULE, C_WAIT_ACK, C_SEND} cstate_e;

  cstate_e    state;
  logic       rx_valid;
  logic [7:0] rx_byte;
  logic       tx_start, tx_busy;
  logic [7:0] tx_byte;
  logic       ack_s, ack_seen, alert_s;
  logic [5:0] byte_cnt;                    // rule bytes received / bytes left to send
  logic [8*STATS_BYTES-1:0] tx_buf;        // bytes to send, next one on top

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(uart_rx), .rx_valid, .rx_byte);

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .tx_start, .tx_byte, .tx_busy, .tx(uart_tx));

  sync_2ff u_sync_ack (.clk, .rst_n, .d(snap_ack_tgl), .q(ack_s));
  sync_2ff u_sync_alr (.clk, .rst_n, .d(alert_tgl),    .q(alert_s));

  assign tx_byte = tx_buf[8*STATS_BYTES-1 -: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      rule_wr_en   <= 1'b0;
      rule_wr_addr <= '0;
      rule_wr_data <= '0;
      snap_req_tgl <= 1'b0;
      clear_tgl    <= 1'b0;
      ack_seen     <= 1'b0;
      byte_cnt     <= '0;
      tx_buf       <= '0;
      tx_start     <= 1'b0;
      alert_ack_tgl <= 1'b0;
    end else begin
      rule_wr_en <= 1'b0;
      tx_start   <= 1'b0;
      unique case (state)
        C_IDLE: if (rx_valid) begin
          unique case (rx_byte)
            CMD_WRITE: state <= C_INDEX;
            CMD_STATS: begin
              snap_req_tgl <= ~snap_req_tgl;
              state        <= C_WAIT_ACK;
            end
            CMD_CLEAR: begin
              clear_tgl <= ~clear_tgl;
              tx_buf    <= {REPLY_OK, {(8*STATS_BYTES-8){1'b0}}};
              byte_cnt  <= 6'd1;
              state     <= C_SEND;
            end
            default: ;
          endcase
        end else if (alert_s != alert_ack_tgl && !tx_busy && !tx_start) begin
          // uart_tx takes the byte with tx_start, so commands are still
          // accepted while the alert goes out
          tx_buf        <= {ALERT, {(8*STATS_BYTES-8){1'b0}}};
          tx_start      <= 1'b1;
          alert_ack_tgl <= alert_s;
        end
        C_INDEX: if (rx_valid) begin
          rule_wr_addr <= rx_byte[IDX_W-1:0];
          byte_cnt     <= '0;
          state        <= C_RULE;
        end
        C_RULE: if (rx_valid) begin
          rule_wr_data <= {rule_wr_data[RULE_W-9:0], rx_byte};
          if (32'(byte_cnt) == RULE_BYTES - 1) begin
            rule_wr_en <= 1'b1;
            tx_buf     <= {REPLY_OK, {(8*STATS_BYTES-8){1'b0}}};
            byte_cnt   <= 6'd1;
            state      <= C_SEND;
          end else byte_cnt <= byte_cnt + 6'd1;
        end
        C_WAIT_ACK: if (ack_s != ack_seen) begin
          ack_seen <= ack_s;
          tx_buf   <= {CMD_STATS, snapshot};
          byte_cnt <= 6'(STATS_BYTES);
          state    <= C_SEND;
        end
        C_SEND: begin
          if (byte_cnt == 6'd0) begin
            state <= C_IDLE;
          end else if (!tx_busy && !tx_start) begin
            tx_start <= 1'b1;
          end else if (tx_start) begin
            tx_buf   <= tx_buf << 8;
            byte_cnt <= byte_cnt - 6'd1;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
