// tb_lehmer_prng: the output sequence against x(n+1) = 69069 x(n) mod 2^30
// computed in 64-bit integers, from reset and after a seed load (an even
// seed is forced odd), plus a check that the top 14 bits take many values.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_lehmer_prng;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, seed_we = 0;
  logic [29:0] seed = 0, rnd;
  longint unsigned m;
  bit seen [16384];
  int distinct;
  always #4 clk = ~clk;

  lehmer_prng #(.M_W(30), .MULT(32'd69069)) dut (.clk, .rst_n, .seed_we, .seed, .rnd);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    m = 1;
    `CHECK(rnd == 30'd1, "reset state")
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      m = (m * 69069) % (64'd1 << 30);
      `CHECK(longint'(rnd) == m, "sequence from reset")
    end
    seed = 30'd123456; seed_we = 1; @(negedge clk); seed_we = 0;
    m = 123457;
    `CHECK(longint'(rnd) == m, "seed forced odd")
    distinct = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      m = (m * 69069) % (64'd1 << 30);
      `CHECK(longint'(rnd) == m, "sequence from seed")
      if (!seen[rnd[29:16]]) begin seen[rnd[29:16]] = 1; distinct++; end
    end
    `CHECK(distinct > 3000, "top bits spread")
    `TB_FINISH
  end
endmodule
