// ids_pkg: types and constants shared by the packet sniffer blocks.
//
// frame_params_t is the bundle of Ethernet header parameters that the frame
// analysis hands to the rules check (the "ETHERNET FRAME PARAMETERS" bus).
// fw_rule_t is the 224-bit layout of one whitelist rule as it is stored in the
// rules memory.  The rule word width (224 bits) and the result code 3 = allowed,
// packet-type codes 1 = TCP and 2 = UDP follow the published design; the field
// layout inside the rule word and the remaining codes are this design's choice.
package ids_pkg;

  // Width of one rule word in the rules memory.
  localparam int unsigned RULE_W = 224;

  // EtherTypes and IP protocol numbers (standard values).
  localparam logic [15:0] ETH_IPV4  = 16'h0800;
  localparam logic [15:0] ETH_ARP   = 16'h0806;
  localparam logic [7:0]  IP_ICMP   = 8'd1;
  localparam logic [7:0]  IP_TCP    = 8'd6;
  localparam logic [7:0]  IP_UDP    = 8'd17;

  // FW_RESULT[1:0]: 3 = allowed; 0, 1 and 2 are this design's choice.
  typedef enum logic [1:0] {
    FW_NONE    = 2'd0,   // no frame checked yet
    FW_ERROR   = 2'd1,   // L2/L3/L4 error (bad MAC status, checksum, length)
    FW_BLOCKED = 2'd2,   // no whitelist rule matched: rule violation
    FW_ALLOWED = 2'd3    // at least one rule matched
  } fw_result_e;

  // PACKET_TYPE[2:0]: 1 = TCP, 2 = UDP; the others are this design's choice.
  typedef enum logic [2:0] {
    PT_OTHER = 3'd0,
    PT_TCP   = 3'd1,
    PT_UDP   = 3'd2,
    PT_ICMP  = 3'd3,
    PT_ARP   = 3'd4
  } pkt_type_e;

  // Header parameters of one frame, valid with the analysis' params_valid strobe.
  // Checksum fields hold the folded one's-complement sum over the covered bytes,
  // checksum field included, so 16'hffff means "checksum correct".
  typedef struct packed {
    logic [47:0] mac_dest;
    logic [47:0] mac_source;
    logic [15:0] lev3_prot;     // EtherType
    logic        lev2_err;      // MAC reported a bad frame, or frame too short
    logic [7:0]  lev4_prot;     // IPv4 protocol field (0 for non-IP frames)
    logic [31:0] ip_source;     // IPv4 source, or ARP sender protocol address
    logic [31:0] ip_dest;       // IPv4 destination, or ARP target protocol address
    logic        lev3_err;      // IPv4 header checksum/version/length error
    logic [15:0] ip_chksum;
    logic [15:0] source_port;
    logic [15:0] dest_port;
    logic [15:0] udp_chksum;
    logic [15:0] tcp_chksum;
    logic [15:0] icmp_chksum;
    logic        lev4_err;      // TCP/UDP/ICMP checksum error
    logic [5:0]  tcp_flags;     // URG ACK PSH RST SYN FIN
    logic [15:0] frame_len;     // bytes received from the MAC
  } frame_params_t;

  // One whitelist rule, 224 bits.  A frame matches a rule when every enabled
  // field matches; a frame is allowed when any valid rule matches.
  typedef struct packed {
    logic        valid;         // rule in use
    logic        any_lev3;      // ignore lev3_prot
    logic        any_lev4;      // ignore lev4_prot
    logic [4:0]  reserved;
    logic [15:0] lev3_prot;
    logic [7:0]  lev4_prot;
    logic [31:0] ip_src;
    logic [31:0] ip_src_mask;   // 1 bits are compared
    logic [31:0] ip_dst;
    logic [31:0] ip_dst_mask;
    logic [15:0] sport_lo;      // inclusive source-port range
    logic [15:0] sport_hi;
    logic [15:0] dport_lo;      // inclusive destination-port range
    logic [15:0] dport_hi;
  } fw_rule_t;

  // Statistics counters, in the order they are sent over the UART.
  localparam int unsigned N_STATS = 7;
  typedef struct packed {
    logic [31:0] packet_error;
    logic [31:0] packet_rulev;
    logic [31:0] packet_pass;
    logic [31:0] tcp;
    logic [31:0] udp;
    logic [31:0] icmp;
    logic [31:0] arp;
  } stats_t;

  // Does one rule accept the frame described by p?
  function automatic logic rule_match(fw_rule_t r, frame_params_t p);
    logic m;
    m = r.valid;
    if (!r.any_lev3 && (r.lev3_prot != p.lev3_prot)) m = 1'b0;
    if (!r.any_lev4 && (r.lev4_prot != p.lev4_prot)) m = 1'b0;
    if (((p.ip_source ^ r.ip_src) & r.ip_src_mask) != 32'd0) m = 1'b0;
    if (((p.ip_dest   ^ r.ip_dst) & r.ip_dst_mask) != 32'd0) m = 1'b0;
    if (p.source_port < r.sport_lo || p.source_port > r.sport_hi) m = 1'b0;
    if (p.dest_port   < r.dport_lo || p.dest_port   > r.dport_hi) m = 1'b0;
    return m;
  endfunction

  // Packet type reported next to FW_RESULT.
  function automatic pkt_type_e classify(frame_params_t p);
    if (p.lev3_prot == ETH_ARP) return PT_ARP;
    if (p.lev3_prot != ETH_IPV4) return PT_OTHER;
    case (p.lev4_prot)
      IP_TCP:  return PT_TCP;
      IP_UDP:  return PT_UDP;
      IP_ICMP: return PT_ICMP;
      default: return PT_OTHER;
    endcase
  endfunction

  // Fold a 32-bit one's-complement accumulator to 16 bits.
  function automatic logic [15:0] csum_fold(logic [31:0] acc);
    logic [16:0] t;
    t = {1'b0, acc[15:0]} + {1'b0, acc[31:16]};
    t = {1'b0, t[15:0]} + {16'd0, t[16]};
    return t[15:0];
  endfunction

endpackage
