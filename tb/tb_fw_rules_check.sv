// tb_fw_rules_check: the rules check against a behavioural 4 x 4 rules memory
// (one-clock read latency).  Random rule sets (masks, port ranges, protocol
// wildcards, invalid rules) and frame parameters, half of them built to fall
// inside a chosen rule, are checked against a whitelist model written here;
// errored frames must give FW_RESULT = 1 whatever the rules.  OUT_RESULT must
// come exactly DEPTH+1 clocks after params_valid, frames spaced DEPTH clocks
// apart must all be checked, and a frame offered earlier must raise overrun.
module tb_fw_rules_check;
  import ids_pkg::*;
  import tb_eth_pkg::*;
  localparam int NB = 4, D = 4;

  logic clk = 0, rst_n = 0;
  frame_params_t params = '0;
  logic params_valid = 0;
  logic rd_en;
  logic [1:0] rd_addr;
  logic [NB-1:0][RULE_W-1:0] rd_data;
  fw_result_e fw_result;
  pkt_type_e packet_type;
  logic out_result, overrun;
  int checks = 0, failures = 0;
  int n_allowed = 0, n_blocked = 0, n_error = 0, n_overrun = 0;

  typedef struct {
    bit valid, any3, any4;
    bit [15:0] l3; bit [7:0] l4;
    bit [31:0] ips, ipsm, ipd, ipdm;
    bit [15:0] slo, shi, dlo, dhi;
  } rule_t;
  rule_t rules [NB*D];
  logic [RULE_W-1:0] mem [NB][D];

  fw_rules_check #(.N_BANKS(NB), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  // behavioural rules memory: rule i in bank i / D, word i % D
  always @(posedge clk) if (rd_en) for (int b = 0; b < NB; b++) rd_data[b] <= mem[b][rd_addr];

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

  function automatic bit rule_hit(rule_t r, frame_params_t p);
    if (!r.valid) return 0;
    if (!r.any3 && r.l3 != p.lev3_prot) return 0;
    if (!r.any4 && r.l4 != p.lev4_prot) return 0;
    if ((p.ip_source & r.ipsm) != (r.ips & r.ipsm)) return 0;
    if ((p.ip_dest & r.ipdm) != (r.ipd & r.ipdm)) return 0;
    if (!(p.source_port >= r.slo && p.source_port <= r.shi)) return 0;
    if (!(p.dest_port >= r.dlo && p.dest_port <= r.dhi)) return 0;
    return 1;
  endfunction

  function automatic bit [15:0] rnd16(); return 16'($urandom); endfunction

  task automatic new_rules();
    for (int i = 0; i < NB*D; i++) begin
      rule_t r;
      bit [15:0] a, b;
      r.valid = ($urandom_range(0, 4) != 0);
      r.any3 = $urandom_range(0, 1); r.any4 = $urandom_range(0, 1);
      r.l3 = $urandom_range(0, 1) ? 16'h0800 : 16'h0806;
      r.l4 = ($urandom_range(0, 1)) ? 8'd6 : 8'd17;
      r.ips = $urandom; r.ipd = $urandom;
      r.ipsm = 32'hffffffff << $urandom_range(0, 32);
      r.ipdm = 32'hffffffff << $urandom_range(0, 32);
      a = rnd16(); b = rnd16();
      r.slo = (a < b) ? a : b; r.shi = (a < b) ? b : a;
      a = rnd16(); b = rnd16();
      r.dlo = (a < b) ? a : b; r.dhi = (a < b) ? b : a;
      rules[i] = r;
      mem[i / D][i % D] = make_rule(r.valid, r.any3, r.any4, r.l3, r.l4, r.ips, r.ipsm,
                                    r.ipd, r.ipdm, r.slo, r.shi, r.dlo, r.dhi);
    end
  endtask

  function automatic frame_params_t rnd_params();
    frame_params_t p;
    rule_t r;
    p = '0;
    r = rules[$urandom_range(0, NB*D-1)];
    p.mac_dest = {16'h0, $urandom}; p.mac_source = {16'h0, $urandom};
    p.lev3_prot = $urandom_range(0, 1) ? 16'h0800 : 16'h0806;
    p.lev4_prot = $urandom_range(0, 1) ? 8'd6 : ($urandom_range(0, 1) ? 8'd17 : 8'd1);
    p.ip_source = $urandom; p.ip_dest = $urandom;
    p.source_port = rnd16(); p.dest_port = rnd16();
    if ($urandom_range(0, 1)) begin          // aim at rule r
      p.lev3_prot = r.l3; p.lev4_prot = r.l4;
      p.ip_source = (r.ips & r.ipsm) | (p.ip_source & ~r.ipsm);
      p.ip_dest   = (r.ipd & r.ipdm) | (p.ip_dest & ~r.ipdm);
      p.source_port = 16'($urandom_range(r.slo, r.shi));
      p.dest_port   = 16'($urandom_range(r.dlo, r.dhi));
      if ($urandom_range(0, 3) == 0) p.dest_port = r.dhi + 16'd1;   // just outside
      if ($urandom_range(0, 3) == 0) p.source_port = r.slo - 16'd1;
    end
    p.lev2_err = ($urandom_range(0, 15) == 0);
    p.lev3_err = ($urandom_range(0, 15) == 0);
    p.lev4_err = ($urandom_range(0, 15) == 0);
    return p;
  endfunction

  function automatic pkt_type_e exp_type(frame_params_t p);
    if (p.lev3_prot == 16'h0806) return PT_ARP;
    if (p.lev3_prot != 16'h0800) return PT_OTHER;
    if (p.lev4_prot == 8'd6) return PT_TCP;
    if (p.lev4_prot == 8'd17) return PT_UDP;
    if (p.lev4_prot == 8'd1) return PT_ICMP;
    return PT_OTHER;
  endfunction

  // expected results, in order, with the clock at which each is due
  typedef struct { fw_result_e res; pkt_type_e pt; longint due; } exp_t;
  exp_t expq[$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    #1;
    if (overrun) n_overrun++;
    if (out_result) begin
      if (expq.size() == 0) check(0, "unexpected OUT_RESULT");
      else begin
        exp_t e;
        e = expq.pop_front();
        check(fw_result == e.res, "FW_RESULT");
        check(packet_type == e.pt, "PACKET_TYPE");
        check(cyc == e.due, "OUT_RESULT latency DEPTH+1");
        case (fw_result)
          FW_ALLOWED: n_allowed++;
          FW_BLOCKED: n_blocked++;
          FW_ERROR:   n_error++;
          default: ;
        endcase
      end
    end else if (expq.size() > 0) check(cyc < expq[0].due, "OUT_RESULT missing");
  end

  task automatic offer(frame_params_t p, bit expect_taken);
    exp_t e;
    @(negedge clk);
    params = p; params_valid = 1;
    if (expect_taken) begin
      e.pt = exp_type(p);
      e.res = FW_BLOCKED;
      for (int i = 0; i < NB*D; i++) if (rule_hit(rules[i], p)) e.res = FW_ALLOWED;
      if (p.lev2_err || p.lev3_err || p.lev4_err) e.res = FW_ERROR;
      e.due = cyc + D + 1;       // cyc counts edges so far; result D+1 edges later
      expq.push_back(e);
    end
    @(negedge clk);
    params_valid = 0; params = ~p;
  endtask

  initial begin
    int ov_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int set = 0; set < 8; set++) begin
      new_rules();
      for (int n = 0; n < 150; n++) begin
        offer(rnd_params(), 1);
        repeat ($urandom_range(D - 2, D + 3)) @(negedge clk);   // spacing D .. D+4
      end
      repeat (D + 3) @(negedge clk);
    end
    // a frame offered one clock after another must be refused
    ov_before = n_overrun;
    offer(rnd_params(), 1);
    @(negedge clk);
    params = rnd_params(); params_valid = 1;
    @(negedge clk);
    params_valid = 0;
    repeat (D + 3) @(negedge clk);
    check(n_overrun == ov_before + 1, "overrun flagged");
    check(expq.size() == 0, "all results seen");
    check(n_allowed > 50 && n_blocked > 50 && n_error > 50, "all outcomes exercised");
    $display("allowed=%0d blocked=%0d error=%0d overrun=%0d", n_allowed, n_blocked, n_error, n_overrun);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
