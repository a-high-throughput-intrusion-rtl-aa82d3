// tb_eth_pkg: frame builder for the testbenches.  Builds Ethernet II frames
// (IPv4 with TCP, UDP or ICMP, or ARP) as byte queues in wire order, with
// correct or deliberately broken checksums, padded to the 60-byte minimum.
// Checksums are computed here with a plain byte loop, independently of the RTL.
package tb_eth_pkg;

  typedef byte unsigned bytes_t[$];

  typedef struct {
    bit [47:0] mac_d, mac_s;
    bit [7:0]  proto;          // 6 TCP, 17 UDP, 1 ICMP
    bit [31:0] ip_s, ip_d;
    bit [15:0] sport, dport;
    bit [5:0]  flags;
    int        payload;        // L4 payload bytes
    int        ihl;            // 5..15
    bit        bad_ip_csum;
    bit        bad_l4_csum;
    bit        udp_no_csum;
  } frame_desc_t;

  function automatic frame_desc_t default_desc();
    frame_desc_t d;
    d.mac_d = 48'h65e49c18a6cd; d.mac_s = 48'h74b57835d139;
    d.proto = 8'd6; d.ip_s = 32'h9ae7711d; d.ip_d = 32'hc02b9dff;
    d.sport = 16'h0021; d.dport = 16'h1387; d.flags = 6'b000010;
    d.payload = 20; d.ihl = 5;
    d.bad_ip_csum = 0; d.bad_l4_csum = 0; d.udp_no_csum = 0;
    return d;
  endfunction

  // One's-complement sum of bytes q[from .. from+n-1], odd byte padded.
  function automatic int unsigned sum16(bytes_t q, int from, int n);
    int unsigned s = 0;
    for (int i = 0; i < n; i += 2) begin
      int unsigned w = q[from+i] << 8;
      if (i + 1 < n) w += q[from+i+1];
      s += w;
    end
    return s;
  endfunction

  function automatic bit [15:0] fold(int unsigned s);
    while (s >> 16) s = (s & 32'hffff) + (s >> 16);
    return s[15:0];
  endfunction

  function automatic bytes_t build_ipv4(frame_desc_t d);
    bytes_t q;
    int l4h, l4len, tlen, ipo, l4o;
    int unsigned s;
    bit [15:0] c;
    l4h   = (d.proto == 8'd6) ? 20 : 8;
    l4len = l4h + d.payload;
    tlen  = 4 * d.ihl + l4len;
    for (int i = 5; i >= 0; i--) q.push_back(d.mac_d[8*i +: 8]);
    for (int i = 5; i >= 0; i--) q.push_back(d.mac_s[8*i +: 8]);
    q.push_back(8'h08); q.push_back(8'h00);
    ipo = q.size();
    q.push_back(8'h40 | d.ihl[3:0]); q.push_back(0);
    q.push_back(tlen[15:8]); q.push_back(tlen[7:0]);
    q.push_back(8'h12); q.push_back(8'h34); q.push_back(8'h40); q.push_back(0);
    q.push_back(8'd64); q.push_back(d.proto); q.push_back(0); q.push_back(0);
    for (int i = 3; i >= 0; i--) q.push_back(d.ip_s[8*i +: 8]);
    for (int i = 3; i >= 0; i--) q.push_back(d.ip_d[8*i +: 8]);
    for (int i = 0; i < 4 * (d.ihl - 5); i++) q.push_back(8'h01);   // NOP options
    l4o = q.size();
    if (d.proto == 8'd6) begin
      q.push_back(d.sport[15:8]); q.push_back(d.sport[7:0]);
      q.push_back(d.dport[15:8]); q.push_back(d.dport[7:0]);
      for (int i = 0; i < 8; i++) q.push_back($urandom_range(0, 255));
      q.push_back(8'h50); q.push_back({2'b00, d.flags});
      q.push_back(8'h20); q.push_back(8'h00);
      q.push_back(0); q.push_back(0); q.push_back(0); q.push_back(0);
    end else if (d.proto == 8'd17) begin
      q.push_back(d.sport[15:8]); q.push_back(d.sport[7:0]);
      q.push_back(d.dport[15:8]); q.push_back(d.dport[7:0]);
      q.push_back(l4len[15:8]); q.push_back(l4len[7:0]);
      q.push_back(0); q.push_back(0);
    end else begin
      q.push_back(8'd8); q.push_back(0); q.push_back(0); q.push_back(0);
      q.push_back(8'h00); q.push_back(8'h01); q.push_back(8'h00); q.push_back(8'h07);
    end
    for (int i = 0; i < d.payload; i++) q.push_back($urandom_range(0, 255));
    // IPv4 header checksum
    c = ~fold(sum16(q, ipo, 4 * d.ihl));
    if (d.bad_ip_csum) c ^= 16'h0100;
    q[ipo+10] = c[15:8]; q[ipo+11] = c[7:0];
    // L4 checksum
    s = sum16(q, l4o, l4len);
    if (d.proto != 8'd1)
      s += d.ip_s[31:16] + d.ip_s[15:0] + d.ip_d[31:16] + d.ip_d[15:0] + d.proto + l4len;
    c = ~fold(s);
    if (d.proto == 8'd17 && c == 16'h0000) c = 16'hffff;
    if (d.bad_l4_csum) c ^= 16'h0010;
    if (d.proto == 8'd17 && d.udp_no_csum) c = 16'h0000;
    if (d.proto == 8'd6)       begin q[l4o+16] = c[15:8]; q[l4o+17] = c[7:0]; end
    else if (d.proto == 8'd17) begin q[l4o+6]  = c[15:8]; q[l4o+7]  = c[7:0]; end
    else                       begin q[l4o+2]  = c[15:8]; q[l4o+3]  = c[7:0]; end
    while (q.size() < 60) q.push_back(8'h00);
    return q;
  endfunction

  function automatic bytes_t build_arp(bit [47:0] mac_s, bit [31:0] spa, bit [31:0] tpa);
    bytes_t q;
    for (int i = 0; i < 6; i++) q.push_back(8'hff);
    for (int i = 5; i >= 0; i--) q.push_back(mac_s[8*i +: 8]);
    q.push_back(8'h08); q.push_back(8'h06);
    q.push_back(0); q.push_back(1); q.push_back(8'h08); q.push_back(0);
    q.push_back(6); q.push_back(4); q.push_back(0); q.push_back(1);
    for (int i = 5; i >= 0; i--) q.push_back(mac_s[8*i +: 8]);
    for (int i = 3; i >= 0; i--) q.push_back(spa[8*i +: 8]);
    for (int i = 0; i < 6; i++) q.push_back(0);
    for (int i = 3; i >= 0; i--) q.push_back(tpa[8*i +: 8]);
    while (q.size() < 60) q.push_back(8'h00);
    return q;
  endfunction

  // A 224-bit whitelist rule word, fields as in ids_pkg::fw_rule_t (written
  // out here independently, MSB first).
  function automatic bit [223:0] make_rule(bit valid, bit any3, bit any4,
      bit [15:0] l3, bit [7:0] l4, bit [31:0] ips, bit [31:0] ipsm,
      bit [31:0] ipd, bit [31:0] ipdm, bit [15:0] slo, bit [15:0] shi,
      bit [15:0] dlo, bit [15:0] dhi);
    return {valid, any3, any4, 5'd0, l3, l4, ips, ipsm, ipd, ipdm, slo, shi, dlo, dhi};
  endfunction

endpackage
