// mac_rx_controller: turns the MAC's receive AXI-stream into the FW_* bus that
// the frame analysis samples.
//
// Every received beat is registered once: FW_ENABLE is MAC_RX_VALID one clock
// later, FW_DATA/FW_KEEP carry the beat (forced to zero when no beat is
// present), LINE_NUMBER is the index of the beat inside its frame (0 for the
// first beat, back to 0 between frames, saturating at 16'hffff) and FW_LAST
// marks the frame's last beat.  One clock after the last beat FW_OUT pulses for
// one clock: it tells the frame analysis that the whole frame has been
// delivered and its header parameters can be computed.  fw_frame_ok carries the
// MAC's frame status taken from MAC_RX_USER on the last beat and is valid while
// FW_OUT is high.
//
// The signal names, the 64-bit/8-bit widths, LINE_NUMBER[15:0] and the roles of
// FW_ENABLE, FW_OUT and FW_LAST follow the published block diagram and
// waveforms.  The one-clock register delay, zeroing of idle data and the
// polarity of MAC_RX_USER are this design's choices.  The published 10G
// waveforms show MAC_RX_USER high with MAC_RX_LAST on good frames, the 100G ones
// show it low on a good frame: RX_USER_GOOD = 1 (default, 10G) treats a high
// MAC_RX_USER on the last beat as "frame good", RX_USER_GOOD = 0 (100G MAC) a
// low one.  The MAC has no back-pressure: one beat may arrive on every clock.
module mac_rx_controller #(
  parameter int unsigned BYTES        = 8,     // bytes per beat (8 at 10G, 64 at 100G)
  parameter bit          RX_USER_GOOD = 1'b1   // MAC_RX_USER on the last beat means "good"
) (
  input  logic                 clk,            // MAC_RX_CLK = FW_CLK
  input  logic                 rst_n,
  // from the Ethernet subsystem
  input  logic                 mac_rx_valid,
  input  logic [8*BYTES-1:0]   mac_rx_data,
  input  logic [BYTES-1:0]     mac_rx_keep,
  input  logic                 mac_rx_last,
  input  logic                 mac_rx_user,
  // to the frame analysis
  output logic                 fw_enable,
  output logic [15:0]          line_number,
  output logic [8*BYTES-1:0]   fw_data,
  output logic [BYTES-1:0]     fw_keep,
  output logic                 fw_last,
  output logic                 fw_out,
  output logic                 fw_frame_ok
);

  logic [15:0] beat_cnt;   // index of the next beat of the current frame
  logic        last_ok;    // MAC status of the beat now on FW_LAST

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fw_enable   <= 1'b0;
      line_number <= '0;
      fw_data     <= '0;
      fw_keep     <= '0;
      fw_last     <= 1'b0;
      fw_out      <= 1'b0;
      fw_frame_ok <= 1'b0;
      last_ok     <= 1'b0;
      beat_cnt    <= '0;
    end else begin
      fw_enable <= mac_rx_valid;
      fw_data   <= mac_rx_valid ? mac_rx_data : '0;
      fw_keep   <= mac_rx_valid ? mac_rx_keep : '0;
      fw_last   <= mac_rx_valid & mac_rx_last;
      fw_out    <= fw_enable & fw_last;
      if (fw_enable & fw_last) fw_frame_ok <= last_ok;
      if (mac_rx_valid) begin
        line_number <= beat_cnt;
        if (mac_rx_last) begin
          beat_cnt <= '0;
          last_ok  <= (mac_rx_user == RX_USER_GOOD);
        end else if (beat_cnt != 16'hffff) begin
          beat_cnt <= beat_cnt + 16'd1;
        end
      end else begin
        line_number <= '0;
      end
    end
  end

endmodule
