// tb_frame_analysis: feeds the frame analysis with TCP, UDP (with and without
// checksum), ICMP, ARP and non-IP frames of random lengths, with IPv4 options,
// with corrupted IPv4 or L4 checksums and with bad MAC status, on the FW bus
// exactly as the MAC RX controller presents it (random gaps, including a new
// frame starting on the FW_OUT clock).  Every parameter set is compared with
// the values the frame was built from, and params_valid must follow FW_OUT
// by exactly one clock.
module tb_frame_analysis;
  import ids_pkg::*;
  import tb_eth_pkg::*;
  localparam int BYTES = 8;

  logic clk = 0, rst_n = 0;
  logic fw_enable = 0, fw_out = 0, fw_frame_ok = 0;
  logic [15:0] line_number = 0;
  logic [8*BYTES-1:0] fw_data = '0;
  logic [BYTES-1:0] fw_keep = '0;
  frame_params_t params;
  logic params_valid;
  int checks = 0, failures = 0, seen = 0;

  typedef struct {
    bit [47:0] mac_d, mac_s;
    bit [15:0] l3;
    bit [7:0]  l4;
    bit [31:0] ip_s, ip_d;
    bit [15:0] sport, dport;
    bit        e2, e3, e4;
    bit [5:0]  flags;
    int        len;
  } exp_t;
  exp_t expq[$];

  frame_analysis #(.BYTES(BYTES)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    #1;
    // fw_out is driven on falling edges, so the value seen now is the one the
    // DUT sampled at this edge: params_valid must be its registered copy
    if (rst_n) check(params_valid == fw_out, "params_valid one clock after FW_OUT");
    if (params_valid) begin
      exp_t e;
      seen++;
      if (expq.size() == 0) check(0, "unexpected params_valid");
      else begin
        e = expq.pop_front();
        check(params.mac_dest == e.mac_d, "mac_dest");
        check(params.mac_source == e.mac_s, "mac_source");
        check(params.lev3_prot == e.l3, "lev3_prot");
        check(params.lev4_prot == e.l4, "lev4_prot");
        check(params.ip_source == e.ip_s, "ip_source");
        check(params.ip_dest == e.ip_d, "ip_dest");
        check(params.source_port == e.sport, "source_port");
        check(params.dest_port == e.dport, "dest_port");
        check(params.lev2_err == e.e2, "lev2_err");
        check(params.lev3_err == e.e3, "lev3_err");
        check(params.lev4_err == e.e4, "lev4_err");
        check(params.frame_len == 16'(e.len), "frame_len");
        if (e.l3 == 16'h0800 && !e.e3) check(params.ip_chksum == 16'hffff, "ip_chksum");
        if (e.l4 == 8'd6) check(params.tcp_flags == e.flags, "tcp_flags");
        if (e.l4 == 8'd6 && !e.e4) check(params.tcp_chksum == 16'hffff, "tcp_chksum");
        if (e.l4 == 8'd17 && !e.e4) check(params.udp_chksum == 16'hffff, "udp_chksum");
        if (e.l4 == 8'd1 && !e.e4) check(params.icmp_chksum == 16'hffff, "icmp_chksum");
      end
    end
  end

  bit pend = 0, pend_ok = 0;

  task automatic cycle_idle();
    @(negedge clk);
    fw_out = pend; fw_frame_ok = pend_ok; pend = 0;
    fw_enable = 0; line_number = 0; fw_data = '0; fw_keep = '0;
  endtask

  task automatic drive(bytes_t q, bit ok, int gap);
    int nb = (q.size() + BYTES - 1) / BYTES;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      fw_out = pend; fw_frame_ok = pend_ok; pend = 0;
      fw_enable = 1; line_number = 16'(b);
      fw_data = '0; fw_keep = '0;
      for (int k = 0; k < BYTES; k++)
        if (b * BYTES + k < q.size()) begin
          fw_data[8*k +: 8] = q[b*BYTES + k];
          fw_keep[k] = 1'b1;
        end
      if (b == nb - 1) begin pend = 1; pend_ok = ok; end
    end
    repeat (gap) cycle_idle();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      frame_desc_t d;
      bytes_t q;
      exp_t e;
      bit ok;
      int kind;
      kind = $urandom_range(0, 9);
      d = default_desc();
      d.mac_d = {$urandom, $urandom}; d.mac_s = {$urandom, $urandom};
      d.ip_s = $urandom; d.ip_d = $urandom;
      d.sport = $urandom; d.dport = $urandom; d.flags = $urandom;
      d.payload = $urandom_range(0, 300);
      d.ihl = ($urandom_range(0, 3) == 0) ? $urandom_range(5, 15) : 5;
      d.bad_ip_csum = ($urandom_range(0, 9) == 0);
      d.bad_l4_csum = ($urandom_range(0, 9) == 0);
      ok = ($urandom_range(0, 19) != 0);
      e.mac_d = d.mac_d; e.mac_s = d.mac_s; e.e2 = !ok; e.flags = d.flags;
      e.e3 = 0; e.e4 = 0;
      if (kind <= 6) begin
        d.proto = (kind <= 2) ? 8'd6 : (kind <= 5) ? 8'd17 : 8'd1;
        d.udp_no_csum = (d.proto == 8'd17) && ($urandom_range(0, 4) == 0);
        q = build_ipv4(d);
        e.l3 = 16'h0800; e.l4 = d.proto; e.ip_s = d.ip_s; e.ip_d = d.ip_d;
        e.sport = (d.proto == 8'd1) ? 16'd0 : d.sport;
        e.dport = (d.proto == 8'd1) ? 16'd0 : d.dport;
        e.e3 = d.bad_ip_csum;
        e.e4 = d.bad_l4_csum && !d.udp_no_csum;
      end else if (kind <= 8) begin
        q = build_arp(d.mac_s, d.ip_s, d.ip_d);
        e.mac_d = 48'hffffffffffff;
        e.l3 = 16'h0806; e.l4 = 0; e.ip_s = d.ip_s; e.ip_d = d.ip_d;
        e.sport = 0; e.dport = 0;
      end else begin
        q = build_arp(d.mac_s, d.ip_s, d.ip_d);
        q[12] = 8'h88; q[13] = 8'hb5;          // experimental EtherType
        e.mac_d = 48'hffffffffffff;
        e.l3 = 16'h88b5; e.l4 = 0; e.ip_s = 0; e.ip_d = 0;
        e.sport = 0; e.dport = 0;
      end
      e.len = q.size();
      expq.push_back(e);
      drive(q, ok, $urandom_range(0, 3));
    end
    repeat (5) cycle_idle();
    check(seen == 400, "all frames analysed");
    check(expq.size() == 0, "no frame left");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
