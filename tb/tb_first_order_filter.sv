// tb_first_order_filter: step responses of the low-pass and high-pass
// against a real-valued model of a one-pole filter with coefficient
// 2^-shift (tolerance 3 LSB), pass-through when disabled, and saturation
// of the high-pass on a full-scale step.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_first_order_filter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en = 0, hp = 0;
  logic [4:0] shift = 0;
  logic signed [13:0] x = 0, y;
  real m;
  always #4 clk = ~clk;

  first_order_filter #(.W(14), .SHIFT_W(5), .FRAC(24)) dut (.clk, .rst_n, .en, .highpass(hp), .shift, .x, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // pass-through
    for (int t = 0; t < 20; t++) begin
      x = 14'($urandom);
      @(negedge clk);
      `CHECK(y == x, "disabled stage passes input")
    end
    // low-pass step, shift 4
    x = 0; en = 0; @(negedge clk); @(negedge clk);
    en = 1; hp = 0; shift = 5'd4; x = 14'sd4000; m = 0.0;
    for (int t = 0; t < 200; t++) begin
      m = m + (4000.0 - m) / 16.0;
      @(negedge clk);
      `CHECK_NEAR(int'(y), $rtoi(m), 3, "low-pass step")
    end
    `CHECK_NEAR(int'(y), 4000, 2, "low-pass settles")
    // high-pass step, shift 6
    en = 0; x = 0; @(negedge clk); @(negedge clk);
    en = 1; hp = 1; shift = 5'd6; x = -14'sd3000; m = 0.0;
    for (int t = 0; t < 600; t++) begin
      m = m + (-3000.0 - m) / 64.0;
      @(negedge clk);
      `CHECK_NEAR(int'(y), $rtoi(-3000.0 - m), 3, "high-pass step")
    end
    `CHECK_NEAR(int'(y), 0, 2, "high-pass decays")
    // high-pass saturation on a full-scale jump
    x = 14'sd8000; @(negedge clk);
    `CHECK(y == 14'sd8191, "high-pass saturates")
    `TB_FINISH
  end
endmodule
