// lehmer_prng: Lehmer (multiplicative congruential) noise generator.
//
// The state advances every clock as x <= (MULT * x) mod 2^M_W. With an odd
// seed and MULT = 5 mod 8 the period is 2^(M_W-2) clocks: 2^28 clocks, about
// 2.1 s at 125 MHz for the defaults. The low bits of such a generator are
// poorly random, so users should take the top bits of rnd.
// Ports: seed_we loads (seed | 1) so the state never becomes even.
// The paper names a Lehmer generator with a period of the order of 2 s;
// the modulus and the multiplier are this design's choice to meet that.
module lehmer_prng #(
  parameter int          M_W  = 30,
  parameter logic [31:0] MULT = 32'd69069
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           seed_we,
  input  logic [M_W-1:0] seed,
  output logic [M_W-1:0] rnd
);
  logic [M_W-1:0] prod;                 // product modulo 2^M_W
  assign prod = rnd * MULT[M_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n)       rnd <= M_W'(1);
    else if (seed_we) rnd <= seed | M_W'(1);
    else              rnd <= prod;
  end
endmodule
