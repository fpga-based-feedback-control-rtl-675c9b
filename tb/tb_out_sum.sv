// tb_out_sum: random output_direct values and output_select codes; the
// testbench forms the two sums itself in 32-bit integers, clamps them to
// the 14-bit range and compares with dac1/dac2 one clock later. Directed
// cases check positive and negative saturation and the 'both' code.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_out_sum;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] od [N];
  logic [1:0]         os [N];
  logic signed [13:0] dac1, dac2;
  int e1, e2;
  always #4 clk = ~clk;

  out_sum #(.N_MOD(N), .SW(14)) dut (.clk, .rst_n, .output_direct(od), .output_select(os), .dac1, .dac2);

  function automatic int clamp(int v);
    return v > 8191 ? 8191 : (v < -8192 ? -8192 : v);
  endfunction

  task automatic apply_and_check(string msg);
    e1 = 0; e2 = 0;
    for (int s = 0; s < N; s++) begin
      if (os[s] == 2'd1 || os[s] == 2'd3) e1 += int'(od[s]);
      if (os[s] == 2'd2 || os[s] == 2'd3) e2 += int'(od[s]);
    end
    @(negedge clk);
    `CHECK(int'(dac1) == clamp(e1), msg)
    `CHECK(int'(dac2) == clamp(e2), msg)
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    for (int s = 0; s < N; s++) begin od[s] = '0; os[s] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      for (int s = 0; s < N; s++) begin
        od[s] = 14'($urandom_range(0, 2000)) - 14'sd1000;
        os[s] = 2'($urandom);
      end
      apply_and_check("random sum");
    end
    for (int s = 0; s < N; s++) begin od[s] = 14'sd3000; os[s] = 2'd3; end
    apply_and_check("positive saturation");
    `CHECK(dac1 == 14'sd8191 && dac2 == 14'sd8191, "saturated high")
    for (int s = 0; s < N; s++) begin od[s] = -14'sd3000; os[s] = (s < 2) ? 2'd1 : 2'd2; end
    apply_and_check("negative saturation");
    `CHECK(dac1 == -14'sd6000 && dac2 == -14'sd8192, "two summed / saturated low")
    `TB_FINISH
  end
endmodule
