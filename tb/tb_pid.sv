// tb_pid: the controller terms one at a time against hand-computed values.
//  - P: p = 1.0, setpoint 100, input 300 -> output 200, with the latency
//    (4 filter stages + 3 clocks) checked.
//  - I: i = 2^22 (0.25 LSB per clock for an error of 256) -> ramp slope.
//  - ival write loads the integrator.
//  - saturation at out_max / out_min.
//  - D: an input step of 64 with d = 1.0 gives a one-clock pulse of 64.
//  - pre-filter: a low-pass stage slows the P response.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_pid;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  pid_cfg_t cfg;
  logic ival_we = 0;
  sig_t ival = 0, in_s = 0, out_s, ival_out;
  int t0, lat, v0, v1;
  always #4 clk = ~clk;

  pid dut (.clk, .rst_n, .cfg, .ival_we, .ival, .input_signal(in_s), .output_signal(out_s), .ival_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    cfg = '0; cfg.out_max = SIG_MAX; cfg.out_min = SIG_MIN;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // P term and latency
    cfg.p = 24'sd4096; cfg.setpoint = 14'sd100;
    repeat (20) @(negedge clk);
    `CHECK(out_s == -14'sd100, "P on error -100")
    in_s = 14'sd300; t0 = 0;
    while (out_s != 14'sd200 && t0 < 50) begin @(negedge clk); t0++; end
    `CHECK(t0 == 7, "P latency 7 clocks")
    `CHECK(out_s == 14'sd200, "P = e")
    cfg.p = 24'sd2048; repeat (5) @(negedge clk);
    `CHECK(out_s == 14'sd100, "P = 0.5 e")
    // I term: error 256, i = 2^22 -> 0.25 LSB per clock
    cfg.p = 0; cfg.setpoint = 14'sd44; cfg.i = 24'sd4194304;
    repeat (10) @(negedge clk);
    v0 = int'(ival_out);
    repeat (400) @(negedge clk);
    v1 = int'(ival_out);
    `CHECK_NEAR(v1 - v0, 100, 1, "integrator slope 0.25 LSB/clock")
    `CHECK_NEAR(int'(out_s), v1, 1, "output is the integral when P = D = 0")
    // ival write
    @(negedge clk); ival = -14'sd2000; ival_we = 1; @(negedge clk); ival_we = 0;
    `CHECK_NEAR(int'(ival_out), -2000, 1, "ival loads the integrator")
    // saturation
    cfg.i = 0; cfg.out_max = 14'sd500; cfg.out_min = -14'sd1500;
    repeat (5) @(negedge clk);
    `CHECK(out_s == -14'sd1500, "clamped at out_min")
    @(negedge clk); ival = 14'sd3000; ival_we = 1; @(negedge clk); ival_we = 0;
    repeat (5) @(negedge clk);
    `CHECK(out_s == 14'sd500, "clamped at out_max")
    // D term: step of 64
    cfg.out_max = SIG_MAX; cfg.out_min = SIG_MIN;
    @(negedge clk); ival = 0; ival_we = 1; @(negedge clk); ival_we = 0;
    cfg.d = 24'sd1024; cfg.setpoint = 0; in_s = 0;
    repeat (10) @(negedge clk);
    `CHECK(out_s == 0, "D idle")
    in_s = 14'sd64;
    v0 = 0; v1 = 0;
    for (int t = 0; t < 15; t++) begin
      @(negedge clk);
      if (out_s == 14'sd64) v0++;
      if (out_s != 0 && out_s != 14'sd64) v1++;
    end
    `CHECK(v0 == 1, "D pulse lasts one clock")
    `CHECK(v1 == 0, "D pulse height")
    // pre-filter: low-pass shift 3 in stage 2 slows the P step
    cfg.d = 0; cfg.p = 24'sd4096; in_s = 0;
    cfg.filt[2].en = 1; cfg.filt[2].highpass = 0; cfg.filt[2].shift = 5'd3;
    repeat (100) @(negedge clk);
    in_s = 14'sd1000;
    repeat (8) @(negedge clk);
    `CHECK(out_s > 0 && out_s < 14'sd500, "filtered step rises slowly")
    repeat (200) @(negedge clk);
    `CHECK_NEAR(int'(out_s), 1000, 2, "filtered step settles")
    `TB_FINISH
  end
endmodule
