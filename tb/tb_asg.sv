// tb_asg: one ASG channel.
//  1. Table i -> 40*i - 2000 for i < 100, last = 99, step = 2^16 (one entry
//     per clock), immediate trigger: the output walks the table and wraps
//     after 100 entries.
//  2. scale 0.5 and offset 100.
//  3. Burst of 3 periods: exactly 300 clocks of running, then offset.
//  4. External trigger with on_delay = 50 and off_delay = 130: start 50
//     (+ fixed pipeline) clocks after the edge, stop after 130 clocks.
//  5. Fractional step 2^15: every entry is held for two clocks.
//  6. Noise mode: output differs from clock to clock and spreads widely.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_asg;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  asg_cfg_t cfg;
  logic trig_ext = 0, trig_sw = 0, seed_we = 0, wr_en = 0, running;
  logic [29:0] seed = 0;
  logic [13:0] wr_addr = 0;
  sig_t wr_data = 0, out_s;
  int idx, n, t0, distinct;
  bit seen [16384];
  always #4 clk = ~clk;

  asg dut (.clk, .rst_n, .cfg, .trig_ext, .trig_sw, .seed_we, .seed, .wr_en, .wr_addr, .wr_data,
           .output_signal(out_s), .running);

  function automatic int tv(int i);
    return 40 * i - 2000;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    cfg = '0; cfg.scale = 16'sd8192; cfg.last = 14'd99; cfg.step = 30'd65536;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 14'(i); wr_data = 14'(tv(i));
    end
    @(negedge clk); wr_en = 0;
    `CHECK(out_s == 0, "idle output is the offset")
    // 1
    cfg.enable = 1;
    while (out_s != 14'(tv(0))) @(negedge clk);
    idx = 0;
    for (int t = 0; t < 350; t++) begin
      `CHECK(out_s == 14'(tv(idx)), "table playback")
      idx = (idx + 1) % 100;
      @(negedge clk);
    end
    // 2
    cfg.scale = 16'sd4096; cfg.offset = 14'sd100;
    repeat (3) @(negedge clk);
    idx = (idx + 3) % 100;
    for (int t = 0; t < 50; t++) begin
      `CHECK_NEAR(int'(out_s), tv(idx) / 2 + 100, 0, "scale and offset")
      idx = (idx + 1) % 100;
      @(negedge clk);
    end
    // 3 burst
    cfg.enable = 0; cfg.scale = 16'sd8192; cfg.offset = 0; cfg.cycles = 16'd3;
    repeat (3) @(negedge clk);
    cfg.enable = 1;
    n = 0;
    repeat (400) begin @(negedge clk); if (running) n++; end
    `CHECK(n == 300, "burst of 3 periods")
    `CHECK(!running && out_s == 0, "stopped after the burst")
    // 4 external trigger, delays
    cfg.enable = 0; cfg.cycles = 0; cfg.trig_src = 2'd1; cfg.on_delay = 32'd50; cfg.off_delay = 32'd130;
    repeat (3) @(negedge clk);
    cfg.enable = 1;
    repeat (20) @(negedge clk);
    `CHECK(!running, "waits for the trigger")
    trig_ext = 1; t0 = 0;
    while (!running && t0 < 500) begin @(negedge clk); t0++; end
    `CHECK_NEAR(t0, 52, 0, "turn-on delay 50 clocks after the edge")
    n = 0;
    repeat (300) begin @(negedge clk); if (running) n++; end
    `CHECK_NEAR(n, 129, 1, "turn-off delay 130 clocks")
    trig_ext = 0;
    // 5 fractional step
    cfg.enable = 0; cfg.trig_src = 2'd0; cfg.on_delay = 0; cfg.off_delay = 0; cfg.step = 30'd32768;
    repeat (3) @(negedge clk);
    cfg.enable = 1;
    while (out_s != 14'(tv(0))) @(negedge clk);
    for (int t = 0; t < 100; t++) begin
      `CHECK(out_s == 14'(tv(t / 2)), "half-speed playback")
      @(negedge clk);
    end
    // 6 noise
    cfg.noise = 1;
    repeat (5) @(negedge clk);
    distinct = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (!seen[out_s]) begin seen[out_s] = 1; distinct++; end
    end
    `CHECK(distinct > 1500, "noise spreads")
    `TB_FINISH
  end
endmodule
