// tb_iq_sine_lut: every one of the 8192 phases of each port against
// (2^17-1) * sin(2 pi (p + 0.5) / 8192) computed with $sin, within 1 LSB,
// with the one-clock read latency.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_iq_sine_lut;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [12:0] ph [4];
  logic signed [17:0] sn [4];
  int errs;
  always #4 clk = ~clk;

  iq_sine_lut #(.LUT_AW(11), .LUT_DW(17), .NPORT(4)) dut (.clk, .phase(ph), .sine(sn));

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    for (int k = 0; k < 4; k++) ph[k] = '0;
    @(negedge clk);
    for (int p = 0; p < 8192; p++) begin
      for (int k = 0; k < 4; k++) ph[k] = 13'(p + k * 2048);
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        real e;
        e = 131071.0 * $sin(2.0 * 3.14159265358979 * (real'((p + k * 2048) % 8192) + 0.5) / 8192.0);
        `CHECK_NEAR(int'(sn[k]), $rtoi(e >= 0 ? e + 0.5 : e - 0.5), 1, "sine value")
      end
    end
    `TB_FINISH
  end
endmodule
