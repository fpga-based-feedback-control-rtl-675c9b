// tb_scope: acquisition, decimation and triggering of the two-channel
// scope. ch1 is a ramp (+1 per clock), ch2 its negative, except in the
// threshold test where ch1 is a saw-tooth.
//  1. decimation 1, immediate trigger, 100 points after it: neighbouring
//     points differ by 1, ch2 = -ch1, wr_ptr - trig_ptr = 101 (the trigger point and
//     trig_delay = 100 more).
//  2. decimation 4 (log_dec 2): neighbouring points differ by 4. An
//     alternating +-1000 input at log_dec 1 gives points of 0, which
//     shows averaging rather than plain decimation. A random constant at
//     log_dec 16 (2^16 samples summed) comes back unchanged.
//  3. ch1 rising through 1000: the point at trig_ptr is >= 1000, the one
//     before is below.
//  4. external trigger 300 clocks after arming: time stamp difference.
//  5. rolling mode: never done, write pointer keeps moving.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_scope;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  scope_cfg_t cfg;
  logic arm = 0, trig_sw = 0, trig_ext = 0, armed, done;
  sig_t ch1, ch2, rd1, rd2;
  logic [13:0] rd_addr = 0, wr_ptr, trig_ptr;
  logic [63:0] trig_time, now, t_arm;
  int n = 0, saw = 0, bad, a, b;
  always #4 clk = ~clk;

  scope dut (.clk, .rst_n, .cfg, .arm, .trig_sw, .trig_ext, .ch1, .ch2, .rd_addr, .rd_ch1(rd1), .rd_ch2(rd2),
             .wr_ptr, .trig_ptr, .armed, .done, .trig_time, .now);

  always_ff @(posedge clk) n <= n + 1;
  int cval = 0;
  assign ch1 = saw == 1 ? sig_t'((n * 7) % 6000 - 3000)
             : saw == 2 ? (n[0] ? 14'sd1000 : -14'sd1000)
             : saw == 3 ? sig_t'(cval) : sig_t'(n);
  assign ch2 = -ch1;

  task automatic rd(input logic [13:0] a_in, output int v1, output int v2);
    rd_addr = a_in; @(negedge clk); v1 = int'(rd1); v2 = int'(rd2);
  endtask

  task automatic do_arm();
    @(negedge clk); arm = 1; t_arm = now; @(negedge clk); arm = 0;
  endtask

  task automatic wait_done();
    int t = 0;
    while (!done && t < 400000) begin @(negedge clk); t++; end
    `CHECK(done, "acquisition finished")
  endtask

  initial begin
    repeat (1200000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1
    cfg.trig_src = TRIG_IMMEDIATE; cfg.trig_delay = 14'd100;
    do_arm(); wait_done();
    `CHECK_NEAR(int'(14'(wr_ptr - trig_ptr)), 101, 0, "points after the trigger")
    bad = 0;
    for (int k = 0; k < 100; k++) begin
      int p1, p2, q1, q2;
      rd(14'(trig_ptr + k), p1, p2);
      rd(14'(trig_ptr + k + 1), q1, q2);
      if (14'(q1 - p1) != 14'd1 || p2 != -p1) bad++;
    end
    `CHECK(bad == 0, "ramp recorded sample by sample")
    // 2
    cfg.log_dec = 5'd2; cfg.trig_delay = 14'd50;
    do_arm(); wait_done();
    bad = 0;
    for (int k = 0; k < 50; k++) begin
      int p1, p2, q1, q2;
      rd(14'(trig_ptr + k), p1, p2);
      rd(14'(trig_ptr + k + 1), q1, q2);
      if (14'(q1 - p1) != 14'd4) bad++;
    end
    `CHECK(bad == 0, "averaged points 4 samples apart")
    `CHECK_NEAR(int'(14'(wr_ptr - trig_ptr)), 51, 0, "decimated points after the trigger")
    // 2b. averaging, not plain decimation: +-1000 alternating averages to 0
    saw = 2; cfg.log_dec = 5'd1; cfg.trig_delay = 14'd20;
    repeat (10) @(negedge clk);
    do_arm(); wait_done();
    bad = 0;
    for (int k = 0; k < 20; k++) begin
      rd(14'(trig_ptr + k), a, b);
      if (a != 0 || b != 0) bad++;
    end
    `CHECK(bad == 0, "2-sample average of an alternating signal is 0")
    // 2c. longest average, 2^16 samples of a random constant: no overflow
    saw = 3; cval = int'($urandom_range(16000)) - 8000;
    cfg.log_dec = 5'd16; cfg.trig_delay = 14'd2;
    repeat (70000) @(negedge clk);
    do_arm(); wait_done();
    bad = 0;
    for (int k = 0; k < 2; k++) begin
      rd(14'(trig_ptr + k), a, b);
      if (a != cval || b != -cval) bad++;
    end
    `CHECK(bad == 0, "2^16-sample average of a constant is the constant")
    // 3
    saw = 1; cfg.log_dec = 0; cfg.trig_src = TRIG_CH1_RISE; cfg.threshold = 14'sd1000;
    cfg.hysteresis = 14'sd50; cfg.trig_delay = 14'd200;
    repeat (10) @(negedge clk);
    do_arm(); wait_done();
    rd(trig_ptr, a, b);
    `CHECK(a >= 1000 && a < 1007, "trigger point at threshold")
    rd(14'(trig_ptr - 1), a, b);
    `CHECK(a < 1000, "point before the trigger below threshold")
    // 4
    saw = 0; cfg.trig_src = TRIG_EXT; cfg.trig_delay = 14'd10;
    do_arm();
    repeat (300) @(negedge clk);
    `CHECK(armed && !done, "waiting for the external trigger")
    trig_ext = 1; wait_done(); trig_ext = 0;
    `CHECK_NEAR(int'(trig_time - t_arm), 302, 2, "trigger time stamp")
    // 5
    cfg.rolling = 1; cfg.trig_src = TRIG_IMMEDIATE;
    do_arm();
    a = int'(wr_ptr);
    repeat (1000) @(negedge clk);
    `CHECK(!done, "rolling mode never stops")
    `CHECK_NEAR(int'(14'(wr_ptr - 14'(a))), 1000, 0, "rolling mode writes continuously")
    `TB_FINISH
  end
endmodule
