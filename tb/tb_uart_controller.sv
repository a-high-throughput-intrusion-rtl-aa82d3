// tb_uart_controller: talks to the UART controller over its serial pins at 8
// clocks per bit.  Writes random rules at random indices and checks the
// memory write port (index, 224-bit word, a single write pulse) and the 'K'
// reply; requests statistics and checks the 28 bytes sent back against the
// snapshot the testbench offers when it sees the request toggle; sends the
// clear command and checks the clear toggle and reply; checks that an
// unknown byte is ignored.  Alerts: a change of alert_tgl while idle must send
// 'A' and be acknowledged; one raised during a rule write must wait until after
// the 'K'; a command arriving while an alert is sent must still be served.
// Statistics replies must start with the 'S' header.
module tb_uart_controller;
  import ids_pkg::*;
  localparam int CPB = 8;
  logic clk = 0, rst_n = 0;
  logic uart_rx = 1, uart_tx;
  logic rule_wr_en;
  logic [3:0] rule_wr_addr;
  logic [RULE_W-1:0] rule_wr_data;
  logic snap_req_tgl, snap_ack_tgl = 0, clear_tgl;
  stats_t snapshot = '0;
  logic alert_tgl = 0, alert_ack_tgl;
  int checks = 0, failures = 0, writes = 0;
  logic [3:0] last_addr;
  logic [RULE_W-1:0] last_data;

  uart_controller #(.CLKS_PER_BIT(CPB)) dut (.*);

  always #50 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rule_wr_en) begin
    writes++;
    last_addr = rule_wr_addr;
    last_data = rule_wr_data;
  end

  // statistics side: answer each request with a fresh random snapshot
  logic req_d = 0;
  stats_t offered;
  always @(posedge clk) begin
    if (snap_req_tgl != req_d) begin
      req_d <= snap_req_tgl;
      for (int i = 0; i < N_STATS; i++) offered[32*i +: 32] = $urandom;
      repeat (5) @(posedge clk);
      snapshot <= offered;
      @(posedge clk);
      snap_ack_tgl <= ~snap_ack_tgl;
    end
  end

  task automatic send_byte(logic [7:0] b);
    uart_rx = 0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_rx = b[i];
      repeat (CPB) @(posedge clk);
    end
    uart_rx = 1;
    repeat (CPB) @(posedge clk);
  endtask

  task automatic recv_byte(output logic [7:0] b, input int timeout);
    int t = 0;
    b = 8'hxx;
    while (uart_tx == 1 && t < timeout) begin @(posedge clk); t++; end
    check(t < timeout, "reply started");
    repeat (CPB / 2) @(posedge clk);
    check(uart_tx == 0, "start bit");
    for (int i = 0; i < 8; i++) begin
      repeat (CPB) @(posedge clk);
      b[i] = uart_tx;
    end
    repeat (CPB) @(posedge clk);
    check(uart_tx == 1, "stop bit");
  endtask

  initial begin
    logic [7:0] r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 12; n++) begin
      logic [RULE_W-1:0] v;
      logic [3:0] idx;
      int w0;
      for (int k = 0; k < RULE_W / 32; k++) v[32*k +: 32] = $urandom;
      idx = 4'($urandom);
      w0 = writes;
      send_byte(8'h57);
      send_byte({4'h0, idx});
      for (int k = RULE_W / 8 - 1; k >= 0; k--) send_byte(v[8*k +: 8]);
      recv_byte(r, 100 * CPB);
      check(r == 8'h4B, "write reply K");
      check(writes == w0 + 1, "one write pulse");
      check(last_addr == idx, "rule index");
      check(last_data == v, "rule word");
    end
    for (int n = 0; n < 3; n++) begin
      logic [8*4*N_STATS-1:0] got;
      send_byte(8'h53);
      recv_byte(r, 200 * CPB);
      check(r == 8'h53, "statistics header S");
      for (int k = 4 * N_STATS - 1; k >= 0; k--) begin
        recv_byte(r, 200 * CPB);
        got[8*k +: 8] = r;
      end
      check(got == offered, "statistics bytes");
    end
    begin
      logic c0;
      c0 = clear_tgl;
      send_byte(8'h43);
      recv_byte(r, 100 * CPB);
      check(r == 8'h4B, "clear reply K");
      check(clear_tgl != c0, "clear toggled");
    end
    // alert while idle
    for (int n = 0; n < 3; n++) begin
      alert_tgl = ~alert_tgl;
      recv_byte(r, 100 * CPB);
      check(r == 8'h41, "alert A while idle");
      check(alert_ack_tgl == alert_tgl, "alert acknowledged");
      repeat (30 * CPB) @(posedge clk);
      check(uart_tx == 1, "one alert per change");
    end
    // alert raised during a rule write goes out after the reply
    begin
      logic [RULE_W-1:0] v;
      for (int k = 0; k < RULE_W / 32; k++) v[32*k +: 32] = $urandom;
      send_byte(8'h57);
      send_byte(8'h05);
      for (int k = RULE_W / 8 - 1; k >= 0; k--) begin
        if (k == 10) alert_tgl = ~alert_tgl;
        send_byte(v[8*k +: 8]);
      end
      recv_byte(r, 100 * CPB);
      check(r == 8'h4B, "write reply before the alert");
      recv_byte(r, 100 * CPB);
      check(r == 8'h41, "alert after the reply");
      check(last_data == v && last_addr == 4'd5, "rule written around the alert");
    end
    // command arriving while an alert is being sent
    begin
      logic c0;
      c0 = clear_tgl;
      alert_tgl = ~alert_tgl;
      repeat (6) @(posedge clk);
      check(uart_tx == 0, "alert under way");
      send_byte(8'h43);
      recv_byte(r, 100 * CPB);
      check(r == 8'h4B, "clear served after the alert");
      check(clear_tgl != c0, "clear toggled during alert");
    end
    begin
      int w0;
      w0 = writes;
      send_byte(8'h00);     // ignored
      repeat (40 * CPB) @(posedge clk);
      check(uart_tx == 1, "no reply to unknown byte");
      check(writes == w0, "no write on unknown byte");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
