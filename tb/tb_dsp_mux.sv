// tb_dsp_mux: random routing test of the 16-slot multiplexer. Each clock
// new random sources and selects are applied; one clock later every slot
// must hold the source its select named (checked against a copy of the
// stimulus kept in the testbench).
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_dsp_mux;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] osig [N];
  logic [3:0]         sel  [N];
  logic signed [13:0] isig [N];
  logic signed [13:0] exp_v [N];
  always #4 clk = ~clk;

  dsp_mux #(.N_MOD(N), .SW(14)) dut (.clk, .rst_n, .output_signal(osig), .input_select(sel), .input_signal(isig));

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    for (int s = 0; s < N; s++) begin osig[s] = '0; sel[s] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(isig[5] == 0, "reset value")
    for (int t = 0; t < 300; t++) begin
      for (int s = 0; s < N; s++) begin
        osig[s] = 14'($urandom);
        sel[s]  = 4'($urandom);
      end
      for (int s = 0; s < N; s++) exp_v[s] = osig[sel[s]];
      @(negedge clk);
      for (int s = 0; s < N; s++) `CHECK(isig[s] == exp_v[s], "routed value")
    end
    // a slot routed to itself and the identity map
    for (int s = 0; s < N; s++) begin osig[s] = 14'(s * 100 - 700); sel[s] = 4'(N - 1 - s); end
    @(negedge clk);
    for (int s = 0; s < N; s++) `CHECK(isig[s] == 14'((N - 1 - s) * 100 - 700), "reverse map")
    `TB_FINISH
  end
endmodule
