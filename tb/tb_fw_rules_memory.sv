// tb_fw_rules_memory: checks the power-up contents (all zero), then writes all
// 16 rule words with random data from the slow write clock and reads them back
// from the fast read clock, bank by bank: a read returns word rd_addr of every
// bank one read clock after rd_en, and holds while rd_en is low.
module tb_fw_rules_memory;
  localparam int NB = 4, D = 4, W = 224;
  logic wr_clk = 0, rd_clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_addr = 0;
  logic [W-1:0] wr_data = '0;
  logic [1:0] rd_addr = 0;
  logic [NB-1:0][W-1:0] rd_data;
  logic [W-1:0] model [NB*D];
  int checks = 0, failures = 0;

  fw_rules_memory #(.N_BANKS(NB), .DEPTH(D), .RULE_W(W)) dut (.*);

  always #50 wr_clk = ~wr_clk;
  always #3.2 rd_clk = ~rd_clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(string what);
    for (int a = 0; a < D; a++) begin
      @(negedge rd_clk);
      rd_en = 1; rd_addr = 2'(a);
      @(negedge rd_clk);
      rd_en = 0; rd_addr = 2'(a + 1);
      for (int b = 0; b < NB; b++) check(rd_data[b] == model[b*D + a], what);
      @(negedge rd_clk);
      for (int b = 0; b < NB; b++) check(rd_data[b] == model[b*D + a], {what, " hold"});
    end
  endtask

  initial begin
    for (int i = 0; i < NB*D; i++) model[i] = '0;
    read_all("power-up zero");
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < NB*D; i++) begin
        logic [W-1:0] v;
        for (int k = 0; k < W/32; k++) v[32*k +: 32] = $urandom;
        if (round > 0 && $urandom_range(0, 1)) continue;
        @(negedge wr_clk);
        wr_en = 1; wr_addr = 4'(i); wr_data = v;
        model[i] = v;
        @(negedge wr_clk);
        wr_en = 0; wr_data = ~v;
      end
      read_all("read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
