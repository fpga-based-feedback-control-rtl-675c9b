// tb_iir: the time-multiplexed biquad against a real-valued model.
//  1. One section b0 = 0.5, loops = 1: output = input / 2.
//  2. 14 sections with b0 = 1/16 each: output = 14/16 of the input, and
//     the output only changes once every 14 clocks.
//  3. A one-pole low-pass written as a biquad (b0 = 1/8, a1 = -7/8) in
//     section 1 next to a pure feed-through D = 0.25 in section 0,
//     loops = 2: the step response follows
//     y(n) = 0.25 x + v(n), v(n) = x/8 + 7/8 v(n-1) within 2 LSB.
//  4. A resonant section (complex poles, r = 0.99) stays bounded and rings.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_iir;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [3:0] loops = 1;
  logic coef_we = 0;
  logic [3:0] coef_sec = 0;
  logic [1:0] coef_idx = 0;
  logic signed [31:0] coef_data = 0;
  sig_t in_s = 0, out_s, prev;
  int changes, t0;
  real v;
  always #4 clk = ~clk;

  iir dut (.clk, .rst_n, .loops, .coef_we, .coef_sec, .coef_idx, .coef_data,
           .pre_en(1'b0), .pre_shift(5'd0), .input_signal(in_s), .output_signal(out_s));

  task automatic wcoef(int sec, int idx, real val);
    @(negedge clk);
    coef_we = 1; coef_sec = 4'(sec); coef_idx = 2'(idx); coef_data = 32'($rtoi(val * 536870912.0));
    @(negedge clk);
    coef_we = 0;
  endtask

  task automatic clear_all();
    for (int s = 0; s < 14; s++) for (int c = 0; c < 4; c++) wcoef(s, c, 0.0);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1
    wcoef(0, 0, 0.5); loops = 1; in_s = 14'sd3000;
    repeat (10) @(negedge clk);
    `CHECK(out_s == 14'sd1500, "b0 = 0.5")
    in_s = -14'sd2001; repeat (10) @(negedge clk);
    `CHECK_NEAR(int'(out_s), -1001, 1, "b0 = 0.5 negative")
    // 2
    for (int s = 0; s < 14; s++) wcoef(s, 0, 0.0625);
    loops = 4'd14; in_s = 14'sd1600;
    repeat (60) @(negedge clk);
    `CHECK_NEAR(int'(out_s), 1400, 1, "14 sections summed")
    changes = 0; t0 = -1;
    for (int t = 0; t < 140; t++) begin
      in_s = 14'(t * 10);
      prev = out_s;
      @(negedge clk);
      if (out_s != prev) begin
        changes++;
        if (t0 >= 0) `CHECK_NEAR(t - t0, 14, 0, "output updated every 14 clocks")
        t0 = t;
      end
    end
    `CHECK(changes >= 9, "output follows a ramp")
    // 3
    clear_all();
    loops = 4'd2; in_s = 0;
    wcoef(0, 0, 0.25);
    wcoef(1, 0, 0.125); wcoef(1, 2, -0.875);
    repeat (200) @(negedge clk);
    `CHECK(out_s == 0, "zero input")
    // align to the period: wait for an output change after the step
    in_s = 14'sd4000;
    t0 = 0; prev = out_s;
    while (out_s == prev && t0 < 20) begin @(negedge clk); t0++; end
    `CHECK(t0 >= 3 && t0 <= 5, "latency between 1 and 2 periods + 1 clock")
    v = 500.0;
    `CHECK_NEAR(int'(out_s), $rtoi(1000.0 + v), 2, "first output sample")
    for (int n = 1; n < 60; n++) begin
      @(negedge clk); @(negedge clk);
      v = 500.0 + 0.875 * v;
      `CHECK_NEAR(int'(out_s), $rtoi(1000.0 + v), 2, "low-pass step response")
    end
    // 4: resonator a1 = -2 r cos(w), a2 = r^2, r = 0.99, w = 0.3
    clear_all();
    loops = 4'd1; in_s = 0;
    wcoef(0, 0, 0.01); wcoef(0, 2, -2.0 * 0.99 * $cos(0.3)); wcoef(0, 3, 0.9801);
    repeat (20) @(negedge clk);
    in_s = 14'sd5000; @(negedge clk); in_s = 0;
    changes = 0;
    for (int t = 0; t < 2000; t++) begin
      prev = out_s; @(negedge clk);
      if ((prev < 0) != (out_s < 0)) changes++;
    end
    `CHECK(changes > 20, "resonator rings")
    `CHECK_NEAR(int'(out_s), 0, 5, "resonator decays")
    `TB_FINISH
  end
endmodule
