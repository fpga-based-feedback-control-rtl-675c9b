// tb_na_accumulator: settle + integrate sequence. With constant inputs the
// sums must be na_cycles * q, the time from the start pulse to done must
// be sleep_cycles + na_cycles + 2 clocks, and a long run with full-scale
// inputs must exceed 32 bits without overflow. A second start restarts
// the measurement.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_na_accumulator;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] sleep_c = 0, na_c = 0;
  logic signed [23:0] q1 = 0, q2 = 0;
  logic signed [61:0] acc1, acc2;
  logic busy, done;
  int n;
  always #4 clk = ~clk;

  na_accumulator #(.IN_W(24), .ACC_W(62), .CNT_W(32)) dut (
    .clk, .rst_n, .start, .sleep_cycles(sleep_c), .na_cycles(na_c), .q1, .q2, .acc1, .acc2, .busy, .done);

  task automatic run(int sl, int na, int v1, int v2);
    sleep_c = 32'(sl); na_c = 32'(na); q1 = 24'(v1); q2 = 24'(v2);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n = 1;
    `CHECK(busy, "busy after start")
    while (!done && n < 100000) begin @(negedge clk); n++; end
    `CHECK_NEAR(n - 1, sl + na + 2, 0, "clocks from the start edge to done")
    `CHECK(acc1 == 62'(longint'(na) * longint'(v1)), "acc1")
    `CHECK(acc2 == 62'(longint'(na) * longint'(v2)), "acc2")
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(!busy && !done, "idle after reset")
    run(5, 20, 1000, -7);
    run(0, 1, 12345, -12345);
    run(100, 3000, 8388607, -8388608);
    `CHECK(acc1 > 62'sd4294967296, "sum wider than 32 bits")
    // restart while busy
    sleep_c = 10; na_c = 50; q1 = 3; q2 = 4;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (20) @(negedge clk);
    run(2, 10, 9, 1);
    `TB_FINISH
  end
endmodule
