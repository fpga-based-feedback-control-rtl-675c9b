// tb_iq_module: the IQ module as demodulator, band-pass filter, phase
// detector, network analyser and plain oscillator.
//  - oscillator: gain 0, amplitude 1000 -> output_direct is a 1000 LSB sine
//    with the programmed period (64 clocks).
//  - demodulation: a tone of amplitude A at the oscillator frequency gives
//    quadrature output A * cos(angle); at two phases 90 degrees apart the
//    root sum of squares is A.
//  - phase detector: a 90 degree step of the phase register moves the
//    CORDIC output by 1024 LSB.
//  - network analyser: after sleep + na cycles the accumulators hold
//    na_cycles * quadrature.
//  - band-pass: gain 1.0 passes the centre tone with unity amplitude and
//    strongly attenuates a tone 1/48 - 1/64 cycles/clock away.
//  - output_signal selects quadrature, output_direct or the CORDIC phase.
// The input tone is computed here with $sin on a real phase counter.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_iq_module;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  iq_cfg_t cfg;
  logic freq_we = 0;
  sig_t in_s, out_s, out_d, ph;
  logic signed [NA_W-1:0] acc1, acc2;
  logic busy, done;
  real tph = 0.0, tfreq = 1.0 / 64.0, tamp = 0.0;
  real mag, r;
  int qa, qb, amp, c0, c1, zc, n;
  sig_t prev;
  always #4 clk = ~clk;

  iq_module dut (.clk, .rst_n, .cfg, .freq_we, .input_signal(in_s), .output_signal(out_s),
                 .output_direct(out_d), .na_acc1(acc1), .na_acc2(acc2), .na_busy(busy),
                 .na_done(done), .phase_out(ph));

  // input tone generator
  always_ff @(posedge clk) begin
    tph <= tph + tfreq;
    if (tph >= 1.0) tph <= tph + tfreq - 1.0;
  end
  assign in_s = sig_t'($rtoi(tamp * $sin(2.0 * 3.14159265358979 * tph)));

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  task automatic measure(input int len, output int a);
    int hi = -100000, lo = 100000;
    repeat (len) begin
      @(negedge clk);
      if (int'(out_d) > hi) hi = int'(out_d);
      if (int'(out_d) < lo) lo = int'(out_d);
    end
    a = (hi - lo) / 2;
  endtask

  initial begin
    cfg = '0;
    cfg.frequency = 32'h0400_0000;          // 2^32 / 64: period 64 clocks
    cfg.lp[0] = '{en: 1'b1, highpass: 1'b0, shift: 5'd8};
    cfg.lp[1] = '{en: 1'b1, highpass: 1'b0, shift: 5'd8};
    cfg.quadrature_factor = 16'sd4096;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. plain oscillator
    cfg.amplitude = 14'sd1000;
    repeat (20) @(negedge clk);
    measure(256, amp);
    `CHECK_NEAR(amp, 1000, 3, "oscillator amplitude")
    zc = 0; prev = out_d;
    repeat (640) begin
      @(negedge clk);
      if (prev < 0 && out_d >= 0) zc++;
      prev = out_d;
    end
    `CHECK_NEAR(zc, 10, 1, "oscillator period 64 clocks (rising crossings in 640)")
    cfg.amplitude = '0;

    // 2. demodulation of a tone at the centre frequency
    tamp = 4000.0;
    repeat (6000) @(negedge clk);
    qa = int'(out_s);                       // quadrature output = A * cos(angle)
    cfg.phase = 32'h4000_0000;
    repeat (6000) @(negedge clk);
    qb = int'(out_s);                       // same with +90 degrees
    mag = $sqrt($itor(qa) * $itor(qa) + $itor(qb) * $itor(qb));
    `CHECK_NEAR($rtoi(mag), 4000, 100, "quadrature output magnitude = A")
    cfg.phase = '0;
    repeat (6000) @(negedge clk);

    // 3. phase detector
    cfg.output_signal = IQ_OUT_CORDIC;
    repeat (5) @(negedge clk);
    c0 = int'(ph);
    `CHECK(out_s == ph, "output_signal selects the CORDIC phase")
    cfg.phase = 32'h4000_0000;              // +90 degrees on the demodulation
    repeat (6000) @(negedge clk);
    c1 = int'(ph);
    n = c1 - c0;
    if (n > 2048) n -= 4096;
    if (n < -2048) n += 4096;
    if (n < 0) n = -n;
    `CHECK_NEAR(n, 1024, 12, "90 degree phase step = 1024 LSB")
    cfg.phase = '0;
    repeat (6000) @(negedge clk);

    // 4. network analyser accumulators
    cfg.sleep_cycles = 32'd100; cfg.na_cycles = 32'd1000;
    @(negedge clk); freq_we = 1; @(negedge clk); freq_we = 0;
    `CHECK(busy, "NA busy after a frequency write")
    n = 0;
    while (!done && n < 5000) begin @(negedge clk); n++; end
    `CHECK(done, "NA done")
    `CHECK_NEAR(n, 1100, 3, "NA done after sleep + na cycles")
    r = $itor(acc1); mag = r * r; r = $itor(acc2); mag = $sqrt(mag + r * r) / 1000.0;
    `CHECK_NEAR($rtoi(mag), 4000 * 512, 4000 * 512 / 40, "NA accumulated magnitude / cycles")

    // 5. band-pass filter with gain 1.0
    cfg.gain = 16'sd4096;
    cfg.output_signal = IQ_OUT_DIRECT;
    repeat (6000) @(negedge clk);
    measure(512, amp);
    `CHECK_NEAR(amp, 4000, 200, "band-pass: unity gain at the centre")
    @(negedge clk); prev = out_d; @(negedge clk);
    `CHECK(out_s == prev, "output_signal selects output_direct")
    tfreq = 1.0 / 48.0;
    repeat (8000) @(negedge clk);
    measure(512, amp);
    `CHECK(amp < 400, "band-pass: off-centre tone attenuated")
    $display("off-centre amplitude %0d", amp);
    `TB_FINISH
  end
endmodule
