// tb_workloads: the complete DSP block (default size) running five of the
// applications it was built for, configured only through the register bus.
//
//  1. Pound-Drever-Hall style demodulation: IQ2 sends a 50 MHz tone on out2
//     and demodulates out2 again with two first-order low-pass stages at
//     2.49 MHz (shift 3, second order overall). The demodulation phase is
//     stepped in 45 degree steps. The scope records IQ2's quadrature output
//     (mean and ripple). Expected: the quadrature follows A cos(phi - phi0)
//     with A = 3000 LSB, and the 100 MHz mixing product is suppressed to a
//     ripple below 2 % of A.
//  2. High-Q band-pass at 15 MHz: IQ0 is a band-pass filter (gain 1.0, one
//     first-order low-pass, shift 13 = 2.43 kHz corner). IQ1 acts as the
//     network analyser, exciting IQ0 and demodulating its output inside
//     the FPGA. Expected transfer function:
//     - |H| = 1 at the centre, for demodulation phases 0, 120 and 240 deg;
//     - the measured phase rotated by 120 deg per step;
//     - |H| = 0.707 and a 45 deg shift at +2.43 kHz;
//     - |H| = 0.1 at +24.3 kHz.
//  3. Phase-locked loop: a modelled laser beat note of 4000 LSB at
//     9 MHz + 1.25 kHz is fed to in1. Its frequency is tuned by
//     Kv * (out1 + out2), with Kv = 1e-7 cycles per clock per LSB. The
//     loop is IQ0 (9 MHz, CORDIC output) -> PID0 (PI, out1 = fast
//     actuator) -> PID1 (I on PID0's output, out2 = slow actuator) ->
//     PID2 (I, "temperature", watched only). Expected:
//     - the loop locks, with the CORDIC error near 0;
//     - the slow actuator takes over the frequency offset (out2 = -100,
//       since the beat note starts above 9 MHz), so the fast output
//       returns near 0;
//     - a 60 deg setpoint step (683 LSB) moves the beat-note phase by
//       1/6 cycle.
//  4. IIR filter with ten resonant pole pairs (r = 0.98 at 250 kHz ..
//     2.5 MHz, section gains +-0.1) summed by the time-multiplexed biquad
//     at loops = 10. Expected: the output updates every 10 clocks
//     (12.5 MHz) and the amplitude of a 1000 LSB tone at five frequencies
//     follows |H| of the ten-section model (0.055 .. 3.56) within 3 %.
//  5. In-loop transfer function of a lock: PID0 (pure integrator, unity
//     gain at 20 kHz) drives out2 from in1; the modelled actuator feeds
//     -(first-order 50 kHz low-pass of out2) back to in1. IQ1 adds its
//     excitation to out2 through the output summation and measures out2.
//     A sweep with the loop open gives the reference, and a sweep with it
//     closed gives G_closed = 1 / (1 + C P). From G_closed and the known
//     integrator C, the actuator response P is deduced. Expected:
//     - |G_closed| < 0.3 at 5 kHz and about 1 at 200 kHz;
//     - P matches the model within 5 % and 5 deg up to 50 kHz. The loop
//       delay of about 10 clocks adds 5.7 deg at 200 kHz, so that point
//       is not compared.
// The beat-note model and all reference values are computed here with
// real arithmetic.
// Interface: none (top-level bench); the design sees only adc1/adc2,
// dac1/dac2 and the register bus, driven by one-request-per-access tasks.
// Timing: about 3.6 million clocks (29 ms of 125 MHz time).
// From the paper: the three applications (PDH-type demodulation, the
// high-Q band-pass built from one IQ module, the in-FPGA network analyser,
// the PLL with fast/slow/temperature actuators chained through PIDs, and
// an IIR filter of ten pole pairs at ten clocks per sample, and the
// in-loop network-analyser measurement through the output summation).
// My choices: all frequencies, amplitudes, gains, Kv and the tolerances.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_workloads;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  sig_t adc1, adc2, dac1, dac2;
  logic trig_ext;
  logic [31:0] sys_addr, sys_wdata, sys_rdata, d;
  logic sys_wen, sys_ren, sys_ack, sys_err;
  always #4 clk = ~clk;

  pyrpl_top dut (.*);

  localparam real PI = 3.14159265358979;
  localparam logic [31:0] F50 = 32'd1717986918;     // 50 MHz
  localparam logic [31:0] F15 = 32'd515396076;      // 15 MHz
  localparam logic [31:0] F9  = 32'd309237645;      // 9 MHz
  localparam logic [31:0] DF  = 32'd83443;          // 2428.5 Hz

  // ---- beat-note model (PLL workload) ----
  bit   vco_on = 0;
  real  ph = 0.0, nclk = 0.0, kv = 1.0e-7, f0;
  int   dsum;
  assign dsum = int'(dac1) + int'(dac2);
  always @(posedge clk) begin
    nclk <= nclk + 1.0;
    if (vco_on) ph <= ph + f0 + kv * real'(dsum);
  end
  // ---- plain test tone (IIR workload) ----
  bit   tone_on = 0;
  real  tph = 0.0, tf = 0.0;
  always @(posedge clk) begin
    tph <= tph + tf;
    if (tph >= 1.0) tph <= tph + tf - 1.0;
  end
  // ---- actuator model (in-loop workload): -(first-order low-pass) of out2 ----
  bit   plant_on = 0;
  real  py = 0.0, alpha;
  always @(posedge clk) if (plant_on) py <= py + alpha * (real'(dac2) - py);
  assign adc1 = plant_on ? sig_t'(-$rtoi(py))
              : vco_on  ? sig_t'($rtoi(4000.0 * $sin(2.0 * PI * ph)))
              : tone_on ? sig_t'($rtoi(1000.0 * $sin(2.0 * PI * tph))) : '0;
  assign adc2 = '0;

  task automatic wr(input logic [31:0] ad, input logic [31:0] val);
    @(negedge clk); sys_addr = ad; sys_wdata = val; sys_wen = 1;
    @(negedge clk); sys_wen = 0;
  endtask

  task automatic rd(input logic [31:0] ad, output logic [31:0] val);
    @(negedge clk); sys_addr = ad; sys_ren = 1;
    @(negedge clk); sys_ren = 0;
    val = sys_rdata;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  // one network-analyser point of IQ1: magnitude relative to amplitude*2^9
  // and phase in degrees
  task automatic na_point(input logic [31:0] f, input int amp, input int pre, input int nacyc,
                                 output real mag, output real phd);
    logic [31:0] w;
    logic signed [61:0] a1, a2;
    int n;
    wr(32'h34_0008, f);
    idle(pre);
    n = 0; w = 0;
    while (w[1] == 1'b0 && n < 200000) begin rd(32'h34_0040, w); n++; end
    `CHECK(w[1], "network-analyser point done")
    rd(32'h34_0030, w); a1[31:0] = w;
    rd(32'h34_0034, w); a1[61:32] = w[29:0];
    rd(32'h34_0038, w); a2[31:0] = w;
    rd(32'h34_003C, w); a2[61:32] = w[29:0];
    mag = $sqrt($itor(a1) * $itor(a1) + $itor(a2) * $itor(a2)) / $itor(nacyc) / (amp * 512.0);
    phd = $atan2($itor(a2), $itor(a1)) * 180.0 / PI;
  endtask

  // ten resonant sections of the IIR workload, as written (3.29 rounding)
  real cb0 [10], ca1 [10], ca2 [10];

  // |H| of the sum of the ten sections at nu cycles per filter sample
  function automatic real iir_mag(input real nu);
    real re = 0.0, im = 0.0, w = 2.0 * PI * nu, dr, di, d2;
    for (int j = 0; j < 10; j++) begin
      dr = 1.0 + ca1[j] * $cos(w) + ca2[j] * $cos(2.0 * w);
      di = -(ca1[j] * $sin(w) + ca2[j] * $sin(2.0 * w));
      d2 = dr * dr + di * di;
      re += cb0[j] * dr / d2;
      im -= cb0[j] * di / d2;
    end
    return $sqrt(re * re + im * im);
  endfunction

  function automatic real q329(input real x);
    return $itor($rtoi(x * 536870912.0)) / 536870912.0;
  endfunction

  function automatic real fabs(input real x);
    return x < 0.0 ? -x : x;
  endfunction

  function automatic real wrap180(input real x);
    real y = x;
    while (y > 180.0) y -= 360.0;
    while (y <= -180.0) y += 360.0;
    return y;
  endfunction

  initial begin
    repeat (6000000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  localparam real nu_list [5] = '{0.0123, 0.0417, 0.1003, 0.1999, 0.3};
  localparam real fl_list [4] = '{5.0e3, 20.0e3, 50.0e3, 200.0e3};
  real mr [4], pr [4];
  real gr, gi, g2, olr, oli, cr, ci, c2, pdr, pdi, kint, w, mm, pp, pmr, pmi, pm2;
  real m0, p0, m1, p1, m2, p2, m3, p3, m4, p4, cs, sn, rip, amp, mean, r0, r1;
  int  hi, lo, v, e, emax, gap, gmin, gmax, nchg;
  real nu, th, hm;
  sig_t prev;
  logic [31:0] tp;

  initial begin
    sys_addr = 0; sys_wdata = 0; sys_wen = 0; sys_ren = 0; trig_ext = 0;
    f0 = $itor(F9) / 4294967296.0 + 1.0e-5;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ================= 1. PDH demodulation at 50 MHz =================
    wr(32'h35_0000, 32'd12);                 // IQ2 input <- out2
    wr(32'h35_0004, 32'd2);                  // IQ2 output_direct -> out2
    wr(32'h35_0020, 32'd3000);               // amplitude
    wr(32'h35_001C, 32'd4096);               // quadrature_factor 1.0
    wr(32'h35_0014, (32'h43 << 7) | 32'h43); // two low-pass stages, shift 3
    wr(32'h35_0008, F50);
    wr(32'h3E_0000, 32'd5);                  // scope ch2 <- IQ2 output_signal
    wr(32'h10_0004, 32'd0);                  // immediate trigger
    wr(32'h10_0014, 32'd63);
    cs = 0.0; sn = 0.0; rip = 0.0;
    for (int k = 0; k < 8; k++) begin
      wr(32'h35_000C, 32'(k) << 29);         // 45 degree steps
      idle(300);
      wr(32'h10_0000, 32'd1);
      idle(100);
      rd(32'h10_0024, tp);
      hi = -100000; lo = 100000; mean = 0.0;
      for (int i = 0; i < 64; i++) begin
        rd(32'h12_0000 + 32'(4 * ((int'(tp[13:0]) + i) % 16384)), d);
        v = int'($signed(d));
        mean += $itor(v) / 64.0;
        if (v > hi) hi = v;
        if (v < lo) lo = v;
      end
      cs += mean * $cos(2.0 * PI * k / 8.0);
      sn += mean * $sin(2.0 * PI * k / 8.0);
      if ($itor(hi - lo) / 2.0 > rip) rip = $itor(hi - lo) / 2.0;
    end
    amp = $sqrt(cs * cs + sn * sn) / 4.0;
    $display("PDH: quadrature amplitude %0.1f LSB, largest ripple %0.1f LSB", amp, rip);
    `CHECK_NEAR($rtoi(amp), 3000, 90, "PDH quadrature follows A cos(phi - phi0)")
    `CHECK(rip < 60.0, "PDH 2f ripple below 2 % after the second-order low-pass")
    wr(32'h35_0020, 32'd0);
    wr(32'h35_0004, 32'd0);

    // ================= 2. band-pass at 15 MHz, 2.43 kHz =================
    wr(32'h33_0000, 32'd4);                  // IQ0 input <- IQ1
    wr(32'h33_0014, 32'h4D);                 // one low-pass stage, shift 13
    wr(32'h33_0018, 32'd4096);               // gain 1.0
    wr(32'h33_0024, 32'd1);                  // output_signal = output_direct
    wr(32'h33_0008, F15);
    wr(32'h34_0000, 32'd3);                  // IQ1 input <- IQ0
    wr(32'h34_0020, 32'd2000);               // excitation amplitude
    wr(32'h34_0024, 32'd1);
    wr(32'h34_0014, (32'h48 << 7) | 32'h48); // NA low-pass, shift 8
    wr(32'h34_0028, 32'd110000);          // settle 13 filter time constants
    wr(32'h34_002C, 32'd16384);
    na_point(F15, 2000, 120000, 16384, m0, p0);
    wr(32'h33_000C, 32'd1431655765);         // 120 degrees
    na_point(F15, 2000, 120000, 16384, m1, p1);
    wr(32'h33_000C, 32'd2863311531);         // 240 degrees
    na_point(F15, 2000, 120000, 16384, m2, p2);
    wr(32'h33_000C, 32'd0);
    na_point(F15 + DF, 2000, 120000, 16384, m3, p3);
    na_point(F15 + 10 * DF, 2000, 120000, 16384, m4, p4);
    $display("band-pass |H|: %0.3f %0.3f %0.3f  at +fc %0.3f  at +10fc %0.3f", m0, m1, m2, m3, m4);
    $display("band-pass phase: %0.1f %0.1f %0.1f  at +fc %0.1f", p0, p1, p2, p3);
    `CHECK(m0 > 0.95 && m0 < 1.05, "band-pass unity gain at the centre")
    `CHECK(m1 > 0.95 && m1 < 1.05 && m2 > 0.95 && m2 < 1.05, "unity gain at 120 and 240 deg")
    r0 = wrap180(p1 - p0); r1 = wrap180(p2 - p1);
    `CHECK((fabs(r0) > 117.0 && fabs(r0) < 123.0), "phase register rotates the response by 120 deg")
    `CHECK((fabs(wrap180(r1 - r0)) < 3.0), "second 120 deg step in the same direction")
    `CHECK(m3 > 0.66 && m3 < 0.75, "|H| = 0.707 one corner frequency off centre")
    `CHECK((fabs(wrap180(p3 - p0)) > 40.0 && fabs(wrap180(p3 - p0)) < 50.0), "45 deg at the corner")
    `CHECK(m4 > 0.08 && m4 < 0.12, "|H| = 0.1 ten corners off centre")
    wr(32'h34_0020, 32'd0);
    wr(32'h33_0018, 32'd0);

    // ================= 3. phase-locked loop at 9 MHz =================
    wr(32'h33_0000, 32'd9);                  // IQ0 input <- in1
    wr(32'h33_0014, (32'h44 << 7) | 32'h44); // two low-pass stages, shift 4
    wr(32'h33_0024, 32'd2);                  // CORDIC phase out
    wr(32'h33_0008, F9);
    wr(32'h30_0000, 32'd3);                  // PID0 <- IQ0
    wr(32'h30_000C, 32'd4096);               // p = 1
    wr(32'h30_0010, 32'd524288);             // i = 2^19
    wr(32'h31_0000, 32'd0);                  // PID1 <- PID0
    wr(32'h31_000C, 32'd0);
    wr(32'h31_0010, 32'd65536);              // i = 2^16
    wr(32'h32_0000, 32'd1);                  // PID2 <- PID1
    wr(32'h32_0010, 32'd16384);              // i = 2^14
    vco_on = 1;
    wr(32'h30_0004, 32'd1);                  // close the loop: PID0 -> out1
    wr(32'h31_0004, 32'd2);                  //                 PID1 -> out2
    idle(400000);
    emax = 0;
    for (int k = 0; k < 50; k++) begin
      rd(32'h33_0044, d); e = int'($signed(d[13:0]));
      if (e < 0) e = -e;
      if (e > emax) emax = e;
      idle(200);
    end
    $display("PLL locked: |phase error| <= %0d LSB, fast %0d, slow %0d", emax, int'(dac1), int'(dac2));
    `CHECK(emax < 30, "PLL locked: CORDIC error near 0")
    `CHECK_NEAR(int'(dac2), -100, 10, "slow actuator holds the -1.25 kHz correction")
    `CHECK(int'(dac1) > -20 && int'(dac1) < 20, "fast actuator back near mid-range")
    rd(32'h32_0024, d);
    `CHECK(int'($signed(d)) < -10, "temperature PID integrates the slow actuator")
    r0 = ph - nclk * $itor(F9) / 4294967296.0;
    wr(32'h30_0008, 32'd683);                // 60 degree setpoint step
    idle(200000);
    r1 = ph - nclk * $itor(F9) / 4294967296.0;
    rd(32'h33_0044, d); e = int'($signed(d[13:0]));
    r1 = r1 - r0;
    r1 = r1 - $floor(r1 + 0.5);
    $display("PLL after the 60 deg step: error %0d LSB, beat-note phase moved %0.4f cycles", e, r1);
    `CHECK_NEAR(e, 683, 30, "CORDIC phase follows the setpoint")
    `CHECK((fabs(fabs(r1) - 1.0 / 6.0) < 0.01), "beat-note phase moved by 60 deg")

    // ================= 4. IIR with ten pole pairs, loops = 10 =================
    vco_on = 0;
    wr(32'h30_0004, 32'd0);                  // PIDs off the DACs
    wr(32'h31_0004, 32'd0);
    for (int j = 0; j < 10; j++) begin
      th = 2.0 * PI * 0.02 * (j + 1);        // poles at (j+1) * 250 kHz, r = 0.98
      ca1[j] = q329(-2.0 * 0.98 * $cos(th));
      ca2[j] = q329(0.98 * 0.98);
      // DC gain +-0.1, alternating: the sum has a zero at DC and a
      // structured response between 0.05 and 3.6
      cb0[j] = q329((j % 2 != 0 ? -0.1 : 0.1) * (1.0 - 2.0 * 0.98 * $cos(th) + 0.98 * 0.98));
      wr(32'h36_0100 + 4 * (4 * j + 0), 32'($rtoi(cb0[j] * 536870912.0)));
      wr(32'h36_0100 + 4 * (4 * j + 1), 32'd0);
      wr(32'h36_0100 + 4 * (4 * j + 2), 32'($rtoi(ca1[j] * 536870912.0)));
      wr(32'h36_0100 + 4 * (4 * j + 3), 32'($rtoi(ca2[j] * 536870912.0)));
    end
    wr(32'h36_0008, 32'd10);                 // ten sections: 12.5 MHz output rate
    wr(32'h36_0000, 32'd9);                  // IIR <- in1
    wr(32'h36_0004, 32'd1);                  // IIR -> out1
    tone_on = 1;
    foreach (nu_list[k]) begin
      nu = nu_list[k];
      tf = nu / 10.0;                        // cycles per clock
      idle(5000);
      hi = -100000; lo = 100000;
      gmin = 1000; gmax = 0; gap = 0; nchg = 0; prev = dac1;
      repeat (40000) begin
        @(negedge clk);
        gap++;
        if (dac1 != prev) begin
          if (nchg > 0 && gap < gmin) gmin = gap;
          if (nchg > 0 && gap > gmax) gmax = gap;
          nchg++; gap = 0;
        end
        prev = dac1;
        if (int'(dac1) > hi) hi = int'(dac1);
        if (int'(dac1) < lo) lo = int'(dac1);
      end
      hm = iir_mag(nu);
      $display("IIR at %0.4f of the sample rate: amplitude %0d, model %0.1f, update every %0d..%0d clocks",
               nu, (hi - lo) / 2, 1000.0 * hm, gmin, gmax);
      `CHECK(fabs($itor((hi - lo) / 2) - 1000.0 * hm) < 0.03 * 1000.0 * hm + 4.0, "IIR |H| matches the ten-section model")
      `CHECK(gmin >= 10 && gmin % 10 == 0, "IIR output updates at fclk / loops")
    end
    tone_on = 0;

    // ================= 5. in-loop transfer function of a lock =================
    wr(32'h36_0004, 32'd0);                  // IIR off the DACs
    wr(32'h30_0008, 32'd0);                  // PID0: pure integrator on in1
    wr(32'h30_000C, 32'd0);
    wr(32'h30_0010, 32'd4318000);            // i: unity gain at 20 kHz
    wr(32'h30_0000, 32'd9);
    wr(32'h34_0000, 32'd12);                 // NA (IQ1) input <- out2
    wr(32'h34_0014, 32'd0);                  // no demodulation low-pass
    wr(32'h34_0020, 32'd1000);               // excitation 1000 LSB
    wr(32'h34_0004, 32'd2);                  // excitation -> out2
    wr(32'h34_0028, 32'd20000);              // sleep
    wr(32'h34_002C, 32'd250000);             // na_cycles
    alpha = 1.0 - $exp(-2.0 * PI * 50.0e3 / 125.0e6);
    py = 0.0;
    plant_on = 1;
    kint = 4318000.0 / 4294967296.0;         // integrator gain per clock
    foreach (fl_list[k])                     // reference: loop open, out2 = excitation
      na_point(32'($rtoi(fl_list[k] / 125.0e6 * 4294967296.0)), 1000, 20000, 250000, mr[k], pr[k]);
    wr(32'h30_0024, 32'd0);
    wr(32'h30_0004, 32'd2);                  // close the loop: PID0 -> out2
    foreach (fl_list[k]) begin
      na_point(32'($rtoi(fl_list[k] / 125.0e6 * 4294967296.0)), 1000, 20000, 250000, mm, pp);
      // closed-loop G = measured / reference
      gr = mm / mr[k] * $cos((pp - pr[k]) * PI / 180.0);
      gi = mm / mr[k] * $sin((pp - pr[k]) * PI / 180.0);
      // open loop = 1/G - 1
      g2 = gr * gr + gi * gi;
      olr = gr / g2 - 1.0;
      oli = -gi / g2;
      // controller C = kint / (1 - e^-jw); actuator = open loop / C
      w = 2.0 * PI * fl_list[k] / 125.0e6;
      cr = kint * (1.0 - $cos(w)) / (2.0 - 2.0 * $cos(w));
      ci = -kint * $sin(w) / (2.0 - 2.0 * $cos(w));
      c2 = cr * cr + ci * ci;
      pdr = (olr * cr + oli * ci) / c2;
      pdi = (oli * cr - olr * ci) / c2;
      // model actuator alpha / (1 - (1-alpha) e^-jw)
      pmr = 1.0 - (1.0 - alpha) * $cos(w);
      pmi = (1.0 - alpha) * $sin(w);
      pm2 = pmr * pmr + pmi * pmi;
      m0 = $sqrt(pdr * pdr + pdi * pdi);
      m1 = alpha / $sqrt(pm2);
      p0 = $atan2(pdi, pdr) * 180.0 / PI;
      p1 = $atan2(-pmi, pmr) * 180.0 / PI;
      $display("in-loop %0.0f kHz: |G_closed| %0.3f, actuator %0.3f at %0.1f deg, model %0.3f at %0.1f deg",
               fl_list[k] / 1.0e3, $sqrt(g2), m0, p0, m1, p1);
      if (k == 0) `CHECK($sqrt(g2) < 0.3, "closed-loop response small well inside the loop bandwidth")
      if (k == 3) `CHECK($sqrt(g2) > 0.9 && $sqrt(g2) < 1.1, "closed-loop response near 1 far outside it")
      if (k < 3) begin
        `CHECK(fabs(m0 - m1) < 0.05 * m1, "deduced actuator magnitude matches the model")
        `CHECK(fabs(wrap180(p0 - p1)) < 5.0, "deduced actuator phase matches the model")
      end
    end
    wr(32'h30_0004, 32'd0);
    wr(32'h34_0004, 32'd0);
    plant_on = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
