// tb_pyrpl_top: end-to-end test of the complete DSP block at its default
// size (3 PID, 3 IQ, 1 IIR with 14 sections, 2 ASG, scope with 2^14
// points), driven only through the register bus and the ADC inputs.
// Scenario, in order:
//   1. two ASG offsets summed on out1, then pushed into DAC saturation;
//   2. a 64-entry sine table played by ASG0 on out1;
//   3. the scope, fed from out1, triggered on the rising zero crossing
//      and read back over the bus;
//   4. a two-period burst of ASG0 started by software trigger;
//   5. in1 -> PID0 -> out2 (P only), then the PID input rerouted to in2,
//      then the integrator loaded through an ival write;
//   6. in1 -> IIR -> out2 with one section, first FIR-like, then with
//      feedback (steady-state gain 1);
//   7. IQ0 network analyser in a loop out1 -> IQ0 input: one point is
//      measured and its magnitude compared with amplitude * 2^9;
//   8. the IQ0 demodulation phase stepped by 90 degrees ten times: the
//      CORDIC output moves by 1024 LSB per step and counts turns past pi;
//   9. an unmapped address flags sys_err.
// Each mechanism has a counter; any mechanism that never happened counts
// as a failure at the end.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_pyrpl_top;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  sig_t adc1, adc2, dac1, dac2;
  logic trig_ext;
  logic [31:0] sys_addr, sys_wdata, sys_rdata, d;
  logic sys_wen, sys_ren, sys_ack, sys_err;
  always #4 clk = ~clk;

  pyrpl_top dut (.*);

  localparam int NM = 13;
  int seen [NM];
  string mname [NM] = '{"output summation", "DAC saturation", "ASG table playback",
                        "scope trigger and read-back", "ASG burst stop", "PID proportional path",
                        "multiplexer re-routing", "integrator load by ival", "IIR filter",
                        "network analyser point", "CORDIC phase step", "CORDIC turn counting",
                        "bus error"};
  int v, mx, mn, cnt, tp, a, b, p0, p1, pmax, st;
  logic signed [61:0] acc1, acc2;
  real mag;
  int tab [64];

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

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    for (int m = 0; m < NM; m++) seen[m] = 0;
    adc1 = 14'sd300; adc2 = -14'sd500; trig_ext = 0;
    sys_addr = 0; sys_wdata = 0; sys_wen = 0; sys_ren = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    idle(5);
    `CHECK(dac1 == 0 && dac2 == 0, "DACs idle after reset")

    // 1. summation and saturation: ASG offsets (generators disabled)
    wr(32'h20_001C, 32'd1000);
    wr(32'h20_011C, 32'd2000);
    wr(32'h37_0004, 32'd1);
    wr(32'h38_0004, 32'd1);
    idle(5);
    `CHECK(dac1 == 14'sd3000, "out1 = 1000 + 2000")
    if (dac1 == 14'sd3000 && dac2 == 0) seen[0]++;
    wr(32'h20_011C, 32'd8000);
    idle(5);
    `CHECK(dac1 == 14'sd8191, "out1 saturates at +8191")
    if (dac1 == 14'sd8191) seen[1]++;
    wr(32'h20_011C, -32'sd8000);
    wr(32'h20_001C, -32'sd8000);
    idle(5);
    `CHECK(dac1 == -14'sd8192, "out1 saturates at -8192")
    wr(32'h38_0004, 32'd0);
    wr(32'h20_011C, 32'd0);
    wr(32'h20_001C, 32'd0);

    // 2. ASG0 table playback
    for (int i = 0; i < 64; i++) begin
      tab[i] = $rtoi($floor(3000.0 * $sin(2.0 * 3.14159265358979 * i / 64.0) + 0.5));
      wr(32'h21_0000 + 32'(4 * i), 32'(tab[i]));
    end
    wr(32'h20_0008, 32'd63);
    wr(32'h20_0004, 32'h0001_0000);
    wr(32'h20_0000, 32'd1);                  // enable, immediate trigger
    idle(100);
    mx = -100000; mn = 100000; cnt = 0;
    repeat (128) begin
      @(negedge clk);
      if (int'(dac1) > mx) mx = int'(dac1);
      if (int'(dac1) < mn) mn = int'(dac1);
      for (int i = 0; i < 64; i++) if (int'(dac1) == tab[i]) begin cnt++; break; end
    end
    `CHECK(mx == 3000 && mn == -3000, "ASG sine peaks on out1")
    `CHECK(cnt == 128, "every out1 sample is a table entry")
    if (mx == 3000 && mn == -3000 && cnt == 128) seen[2]++;

    // 3. scope on out1, rising trigger at 0
    wr(32'h3D_0000, 32'd11);                 // scope ch1 <- out1
    wr(32'h10_0004, 32'd1);                  // ch1 rising edge
    wr(32'h10_0008, 32'd0);
    wr(32'h10_000C, 32'd100);
    wr(32'h10_0014, 32'd100);
    wr(32'h10_0000, 32'd1);                  // arm
    st = 0; cnt = 0;
    while (st == 0 && cnt < 200) begin
      rd(32'h10_0000, d); st = int'(d[1]); cnt++;
    end
    `CHECK(st == 1, "scope acquisition done")
    rd(32'h10_0024, d); tp = int'(d[13:0]);
    rd(32'h11_0000 + 32'(4 * tp), d); a = int'($signed(d));
    rd(32'h11_0000 + 32'(4 * ((tp + 16383) % 16384)), d); b = int'($signed(d));
    `CHECK(a >= 0 && b < 0, "trigger point at the rising zero crossing")
    rd(32'h11_0000 + 32'(4 * ((tp + 16) % 16384)), d);
    `CHECK(int'($signed(d)) == 3000, "a quarter period after the trigger the sine peaks")
    if (st == 1 && a >= 0 && b < 0 && int'($signed(d)) == 3000) seen[3]++;

    // 4. ASG0 burst of two periods on software trigger
    wr(32'h20_0000, 32'd0);
    wr(32'h20_000C, 32'd2);
    wr(32'h20_0000, 32'd5);                  // enable, software trigger source
    idle(20);
    `CHECK(dac1 == 0, "burst waits for its trigger")
    wr(32'h20_0000, 32'h15);                 // software trigger
    cnt = 0;
    repeat (400) begin
      @(negedge clk);
      if (dac1 != 0) cnt++;
    end
    rd(32'h20_0024, d);
    `CHECK(cnt >= 120 && cnt <= 128, "burst lasts two 64-clock periods")
    `CHECK(d == 0 && dac1 == 0, "generator stopped after the burst")
    if (cnt >= 120 && cnt <= 128 && d == 0) seen[4]++;
    $display("burst non-zero samples %0d", cnt);
    wr(32'h20_0000, 32'd0);
    wr(32'h37_0004, 32'd0);

    // 5. PID0: in1 -> PID0 -> out2
    wr(32'h30_0000, 32'd9);
    wr(32'h30_0008, 32'd100);
    wr(32'h30_000C, 32'd4096);
    wr(32'h30_0004, 32'd2);
    idle(20);
    `CHECK(dac2 == 14'sd200, "out2 = p * (in1 - setpoint)")
    `CHECK(dac1 == 0, "out1 unaffected")
    if (dac2 == 14'sd200) seen[5]++;
    wr(32'h30_0000, 32'd10);                 // re-route the PID input to in2
    idle(20);
    `CHECK(dac2 == -14'sd600, "out2 follows in2 after re-routing")
    if (dac2 == -14'sd600) seen[6]++;
    wr(32'h30_000C, 32'd0);
    wr(32'h30_0024, 32'd1234);               // load the integrator
    idle(20);
    rd(32'h30_0024, d);
    `CHECK(dac2 == 14'sd1234 && d == 32'd1234, "integrator loaded and held")
    if (dac2 == 14'sd1234 && d == 32'd1234) seen[7]++;
    wr(32'h30_0004, 32'd0);

    // 6. IIR: in1 -> IIR -> out2, one section
    wr(32'h36_0000, 32'd9);
    wr(32'h36_0100, 32'h1000_0000);          // b0 = 0.5
    wr(32'h36_0004, 32'd2);
    idle(20);
    `CHECK(dac2 == 14'sd150, "IIR b0 = 0.5")
    v = int'(dac2);
    wr(32'h36_0108, 32'hF000_0000);          // a1 = -0.5 -> y = 0.5 x + 0.5 y(n-1)
    idle(200);
    `CHECK_NEAR(int'(dac2), 300, 2, "IIR with feedback: DC gain 1")
    if (v == 150 && int'(dac2) >= 298 && int'(dac2) <= 302) seen[8]++;
    wr(32'h36_0004, 32'd0);
    idle(5);
    `CHECK(dac2 == 0, "out2 empty")

    // 7. network analyser loop out1 -> IQ0 -> out1
    wr(32'h33_0000, 32'd11);
    wr(32'h33_0004, 32'd1);
    wr(32'h33_0020, 32'd2000);
    wr(32'h33_0014, (32'h46 << 7) | 32'h46);  // both low-pass stages, shift 6
    wr(32'h33_0028, 32'd500);
    wr(32'h33_002C, 32'd1000);
    wr(32'h33_0008, 32'h0400_0000);          // frequency write starts the point
    rd(32'h33_0040, d);
    `CHECK(d[0] == 1'b1, "NA busy")
    st = 0; cnt = 0;
    while (st == 0 && cnt < 2000) begin
      rd(32'h33_0040, d); st = int'(d[1]); cnt++;
    end
    `CHECK(st == 1, "NA point done")
    rd(32'h33_0030, d); acc1[31:0] = d;
    rd(32'h33_0034, d); acc1[61:32] = d[29:0];
    rd(32'h33_0038, d); acc2[31:0] = d;
    rd(32'h33_003C, d); acc2[61:32] = d[29:0];
    mag = $sqrt($itor(acc1) * $itor(acc1) + $itor(acc2) * $itor(acc2)) / 1000.0;
    `CHECK_NEAR($rtoi(mag), 2000 * 512, 2000 * 512 / 20, "NA magnitude = amplitude * 2^9")
    if (st == 1 && $rtoi(mag) > 2000 * 486 && $rtoi(mag) < 2000 * 538) seen[9]++;

    // 8. CORDIC phase: ten +90 degree steps of the demodulation phase
    wr(32'h33_0024, 32'd2);
    rd(32'h33_0044, d); p0 = int'($signed(d[13:0]));
    pmax = 0;
    for (int k = 1; k <= 10; k++) begin
      wr(32'h33_000C, 32'(k) << 30);
      idle(800);
      rd(32'h33_0044, d); p1 = int'($signed(d[13:0]));
      if (k == 1) begin
        v = p1 - p0; if (v < 0) v = -v;
        `CHECK_NEAR(v, 1024, 20, "90 degree step = 1024 LSB")
        if (v > 1004 && v < 1044) seen[10]++;
      end
      if (p1 > pmax) pmax = p1;
      if (-p1 > pmax) pmax = -p1;
    end
    `CHECK(pmax > 2300, "phase extends past +-pi")
    if (pmax > 2300) seen[11]++;
    $display("CORDIC start %0d, largest |phase| %0d", p0, pmax);

    // 9. bus error
    @(negedge clk); sys_addr = 32'h50_0000; sys_ren = 1;
    @(negedge clk); sys_ren = 0;
    `CHECK(sys_ack && sys_err, "unmapped address flags err")
    if (sys_ack && sys_err) seen[12]++;

    for (int m = 0; m < NM; m++) begin
      $display("mechanism %-28s seen %0d", mname[m], seen[m]);
      if (seen[m] == 0) begin
        failures++;
        $display("FAIL: mechanism never happened: %s", mname[m]);
      end
    end
    `TB_FINISH
  end
endmodule
