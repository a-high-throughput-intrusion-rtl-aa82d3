// tb_sniffer_paper_frames: the frames of the published waveforms, sent to two
// packet sniffers: one with 64-bit beats at 156.25 MHz (10 Gbit/s) and one with
// 512-bit beats at 322.26 MHz (100 Gbit/s).  Each decoded header, rules-check
// result, latency and statistics value is checked (see sniffer_frames_bench).
module tb_sniffer_paper_frames;
  logic done10, done100;
  int c10, f10, c100, f100, checks, failures;

  sniffer_frames_bench #(.BYTES(8), .T_CLK_NS(6.4)) u10 (
    .done(done10), .checks(c10), .failures(f10));
  sniffer_frames_bench #(.BYTES(64), .T_CLK_NS(3.103)) u100 (
    .done(done100), .checks(c100), .failures(f100));

  initial begin
    #1ns;  // let both benches clear their done flags first
    fork
      wait (done10 && done100);
      #50ms;
    join_any
    checks = c10 + c100;
    failures = f10 + f100 + ((done10 && done100) ? 0 : 1);
    if (!(done10 && done100)) $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
