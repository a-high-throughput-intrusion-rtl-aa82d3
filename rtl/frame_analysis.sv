// frame_analysis: computes the header parameters of every received Ethernet
// frame and checks its IPv4 header checksum and its TCP/UDP/ICMP checksum.
//
// The block samples the FW_* bus of the MAC RX controller.  While a frame
// streams in it
//   * stores the first HDR_BYTES bytes of the frame in a header buffer (bytes
//     not received in the frame read as zero),
//   * adds every 16-bit word (network byte order) lying inside the IPv4 header
//     into a one's-complement accumulator, and every word lying inside the L4
//     segment (from the end of the IPv4 header to the end given by the IPv4
//     total length, so Ethernet padding is left out) into a second one,
//   * counts the received bytes.
// The IHL and total-length fields steering the word selection are taken from
// the beat on the bus when they arrive in it, from the header buffer after.
// When FW_OUT pulses (one clock after the last beat) the parameters are decoded
// from the buffer, the TCP/UDP pseudo-header is added to the L4 sum, and
// everything is registered: params and params_valid appear one clock after
// FW_OUT.  A new frame may start on the clock FW_OUT is high.
//
// Checksum outputs hold the folded sum over the covered bytes including the
// transmitted checksum, so 16'hffff means "no corruption", as in the published
// waveforms.  A UDP checksum field of zero (no checksum sent) reads as 16'hffff.
// Only the checksum of the frame's own protocol is updated, the others hold;
// tcp_flags likewise updates on TCP frames only.  For ARP frames ip_source /
// ip_dest carry the sender / target protocol addresses.  lev2_err: the MAC
// flagged the frame or it is shorter than an Ethernet header.  lev3_err: IPv4
// checksum wrong, version not 4, IHL below 5, or total length inconsistent with
// the frame.  lev4_err: L4 checksum wrong or segment shorter than its header.
//
// The list of parameters, their names and widths and the use of L3/L4
// checksums follow the published design; how they are computed (buffer,
// streaming sums, error rules, ARP handling, timing) is this design's choice.
// No VLAN tags are decoded.
module frame_analysis
  import ids_pkg::*;
#(
  parameter int unsigned BYTES     = 8,    // bytes per beat, even
  parameter int unsigned HDR_BYTES = 96    // header bytes kept; >= 88 covers IHL = 15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 fw_enable,
  input  logic [15:0]          line_number,
  input  logic [8*BYTES-1:0]   fw_data,
  input  logic [BYTES-1:0]     fw_keep,
  input  logic                 fw_out,
  input  logic                 fw_frame_ok,
  output frame_params_t        params,
  output logic                 params_valid
);

  localparam int unsigned LANES = BYTES / 2;

  logic [7:0]  hdr [HDR_BYTES];
  logic [31:0] ip_acc, l4_acc;
  logic [15:0] len_acc;

  // ---------------------------------------------------------------- streaming
  logic [31:0] base;                  // frame offset of byte 0 of this beat
  logic        first;                 // beat is the frame's first
  logic [7:0]  v_b14, v_b16, v_b17;   // IHL/total length as currently known
  logic [31:0] l3_end, l4_end;
  logic [31:0] ip_beat, l4_beat;
  logic [15:0] keep_cnt;

  always_comb begin
    base  = 32'(line_number) * BYTES;
    first = fw_enable && (line_number == 16'd0);
    v_b14 = hdr[14];
    v_b16 = hdr[16];
    v_b17 = hdr[17];
    for (int unsigned k = 0; k < BYTES; k++) begin
      if (fw_enable && (base + k == 32'd14)) v_b14 = fw_data[8*k +: 8];
      if (fw_enable && (base + k == 32'd16)) v_b16 = fw_data[8*k +: 8];
      if (fw_enable && (base + k == 32'd17)) v_b17 = fw_data[8*k +: 8];
    end
    l3_end = 32'd14 + 32'(v_b14[3:0]) * 4;
    l4_end = 32'd14 + 32'({v_b16, v_b17});

    ip_beat  = '0;
    l4_beat  = '0;
    keep_cnt = '0;
    for (int unsigned j = 0; j < LANES; j++) begin
      logic [31:0] o;
      logic [7:0]  hi, lo;
      o  = base + 2 * j;
      hi = fw_keep[2*j]   ? fw_data[16*j +: 8]   : 8'h00;
      lo = fw_keep[2*j+1] ? fw_data[16*j+8 +: 8] : 8'h00;
      if (o >= 32'd14 && o < l3_end) begin
        ip_beat = ip_beat + {16'd0, hi, lo};
      end else if (o >= l3_end && o < l4_end) begin
        if (o + 1 >= l4_end) lo = 8'h00;
        l4_beat = l4_beat + {16'd0, hi, lo};
      end
    end
    for (int unsigned k = 0; k < BYTES; k++) keep_cnt = keep_cnt + 16'(fw_keep[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ip_acc  <= '0;
      l4_acc  <= '0;
      len_acc <= '0;
    end else if (fw_enable) begin
      ip_acc  <= (first ? 32'd0 : ip_acc)  + ip_beat;
      l4_acc  <= (first ? 32'd0 : l4_acc)  + l4_beat;
      len_acc <= (first ? 16'd0 : len_acc) + keep_cnt;
    end
  end

  // Header buffer: bytes of this beat are stored, the rest of the buffer is
  // cleared on the first beat of a frame.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < HDR_BYTES; k++) hdr[k] <= 8'h00;
    end else if (fw_enable) begin
      for (int unsigned k = 0; k < HDR_BYTES; k++) begin
        if (32'(k) >= base && 32'(k) < base + BYTES) begin
          hdr[k] <= fw_keep[32'(k) - base] ? fw_data[8*(32'(k) - base) +: 8] : 8'h00;
        end else if (first) begin
          hdr[k] <= 8'h00;
        end
      end
    end
  end

  // ----------------------------------------------------------------- decoding
  frame_params_t nxt;
  logic [3:0]  ihl;
  logic [6:0]  l4o;               // offset of the L4 header
  logic [15:0] tlen, l4_len, udp_field;
  logic [31:0] pseudo;
  logic        is_ip, is_arp;

  always_comb begin
    nxt    = params;
    ihl    = hdr[14][3:0];
    l4o    = 7'd14 + {1'b0, ihl, 2'b00};
    tlen   = {hdr[16], hdr[17]};
    l4_len = tlen - {10'd0, ihl, 2'b00};
    is_ip  = ({hdr[12], hdr[13]} == ETH_IPV4);
    is_arp = ({hdr[12], hdr[13]} == ETH_ARP);

    nxt.mac_dest    = {hdr[0], hdr[1], hdr[2], hdr[3], hdr[4], hdr[5]};
    nxt.mac_source  = {hdr[6], hdr[7], hdr[8], hdr[9], hdr[10], hdr[11]};
    nxt.lev3_prot   = {hdr[12], hdr[13]};
    nxt.lev2_err    = !fw_frame_ok || (len_acc < 16'd14);
    nxt.frame_len   = len_acc;
    nxt.lev4_prot   = '0;
    nxt.ip_source   = '0;
    nxt.ip_dest     = '0;
    nxt.source_port = '0;
    nxt.dest_port   = '0;
    nxt.lev3_err    = 1'b0;
    nxt.lev4_err    = 1'b0;
    udp_field       = {hdr[l4o+6], hdr[l4o+7]};
    pseudo          = 32'({hdr[26], hdr[27]}) + 32'({hdr[28], hdr[29]})
                    + 32'({hdr[30], hdr[31]}) + 32'({hdr[32], hdr[33]})
                    + 32'(hdr[23]) + 32'(l4_len);

    if (is_arp) begin
      nxt.ip_source = {hdr[28], hdr[29], hdr[30], hdr[31]};
      nxt.ip_dest   = {hdr[38], hdr[39], hdr[40], hdr[41]};
    end else if (is_ip) begin
      nxt.lev4_prot = hdr[23];
      nxt.ip_source = {hdr[26], hdr[27], hdr[28], hdr[29]};
      nxt.ip_dest   = {hdr[30], hdr[31], hdr[32], hdr[33]};
      nxt.ip_chksum = csum_fold(ip_acc);
      nxt.lev3_err  = (nxt.ip_chksum != 16'hffff) || (hdr[14][7:4] != 4'd4) || (ihl < 4'd5)
                   || (tlen < {10'd0, ihl, 2'b00}) || (len_acc < tlen + 16'd14);
      case (hdr[23])
        IP_TCP: begin
          nxt.source_port = {hdr[l4o],   hdr[l4o+1]};
          nxt.dest_port   = {hdr[l4o+2], hdr[l4o+3]};
          nxt.tcp_flags   = hdr[l4o+13][5:0];
          nxt.tcp_chksum  = csum_fold(l4_acc + pseudo);
          nxt.lev4_err    = (nxt.tcp_chksum != 16'hffff) || (l4_len < 16'd20);
        end
        IP_UDP: begin
          nxt.source_port = {hdr[l4o],   hdr[l4o+1]};
          nxt.dest_port   = {hdr[l4o+2], hdr[l4o+3]};
          nxt.udp_chksum  = (udp_field == 16'h0000) ? 16'hffff : csum_fold(l4_acc + pseudo);
          nxt.lev4_err    = (nxt.udp_chksum != 16'hffff) || (l4_len < 16'd8);
        end
        IP_ICMP: begin
          nxt.icmp_chksum = csum_fold(l4_acc);
          nxt.lev4_err    = (nxt.icmp_chksum != 16'hffff) || (l4_len < 16'd4);
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      params       <= '0;
      params_valid <= 1'b0;
    end else begin
      params_valid <= fw_out;
      if (fw_out) params <= nxt;
    end
  end

  initial begin
    assert (BYTES % 2 == 0) else $fatal(1, "BYTES must be even");
    assert (HDR_BYTES >= 88) else $fatal(1, "HDR_BYTES must be at least 88");
  end

endmodule
