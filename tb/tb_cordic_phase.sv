// tb_cordic_phase: angle accuracy and turn counting.
//  1. 400 random vectors (radius 2^20 .. 2^22): the low 12 bits of the
//     output must equal atan2(Q, I) / (2 pi) * 4096 within 3 LSB (the
//     paper quotes 0.11 deg = 1.25 LSB quantisation).
//  2. A vector turning slowly counter-clockwise for 6 turns: the output
//     must follow the unwrapped angle up to +4 pi and then saw-tooth
//     between +2 pi and +4 pi; the same clockwise down to -4 pi.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_cordic_phase;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic signed [23:0] i_in = 0, q_in = 0;
  logic signed [13:0] phase;
  real th, r, expv;
  int  e, wraps_seen;
  localparam real PI = 3.14159265358979;
  always #4 clk = ~clk;

  cordic_phase #(.IN_W(24), .N_STAGES(9), .OUT_W(14)) dut (.clk, .rst_n, .i_in, .q_in, .phase);

  task automatic set_angle(real a, real rad);
    i_in = 24'($rtoi(rad * $cos(a)));
    q_in = 24'($rtoi(rad * $sin(a)));
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. random angles, compared modulo one turn
    for (int t = 0; t < 400; t++) begin
      th = 2.0 * PI * real'($urandom_range(0, 99999)) / 100000.0;
      r  = real'($urandom_range(1 << 20, 1 << 22));
      set_angle(th, r);
      @(negedge clk);
      e = $rtoi(th / (2.0 * PI) * 4096.0);
      begin
        int d;
        d = (int'(phase[11:0]) - e) % 4096;
        if (d > 2048) d -= 4096;
        if (d < -2048) d += 4096;
        `CHECK_NEAR(d, 0, 3, "angle")
      end
    end
    // 2. slow counter-clockwise rotation from angle 0
    rst_n = 0; set_angle(0.01, 3.0e6); @(negedge clk); rst_n = 1;
    expv = 0.01 / (2.0 * PI) * 4096.0 - 8.0;
    wraps_seen = 0;
    for (int t = 0; t < 6 * 512; t++) begin
      th = 0.01 + 2.0 * PI * real'(t) / 512.0;
      expv = expv + 8.0;
      if (expv >= 8192.0) begin expv = expv - 4096.0; wraps_seen++; end
      set_angle(th, 3.0e6);
      @(negedge clk);
      if ($rtoi(expv) % 4096 > 4 && $rtoi(expv) % 4096 < 4092)
        `CHECK_NEAR(int'(phase), $rtoi(expv), 3, "unwrapped phase, counter-clockwise")
    end
    `CHECK(wraps_seen == 4, "saturation reached")
    // 3. clockwise back down to the negative limit
    for (int t = 6 * 512 - 2; t >= -6 * 512; t--) begin
      th = 0.01 + 2.0 * PI * real'(t) / 512.0;
      expv = expv - 8.0;
      if (expv < -8192.0) expv = expv + 4096.0;
      set_angle(th, 3.0e6);
      @(negedge clk);
      if (($rtoi(expv) % 4096 + 4096) % 4096 > 4 && ($rtoi(expv) % 4096 + 4096) % 4096 < 4092)
        `CHECK_NEAR(int'(phase), $rtoi(expv), 3, "unwrapped phase, clockwise")
    end
    `TB_FINISH
  end
endmodule
