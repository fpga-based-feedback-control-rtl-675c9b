// cordic_phase: CORDIC phase estimator with turn counting, for phase locks.
//
// From the quadratures (I, Q) it computes the angle atan2(Q, I) and
// extends it over four turns. The signs of I and Q give the quadrant, and
// the vector is turned by a multiple of pi/2 into the first quadrant. A
// first pseudo-rotation by pi/4 brings it into -pi/4..pi/4, then N_STAGES
// shift-and-add pseudo-rotations by atan(2^-k), k = 1..N_STAGES, turn it
// clockwise or counter-clockwise depending on the sign of its vertical
// coordinate while the angles are accumulated. All stages are
// combinational; the result is registered (latency one clock).
// Output: 14-bit signed phase {turn[1:0], quadrant[1:0], fine[9:0]}, one
// LSB = 2pi/4096, range -4pi..4pi. A 3->0 quadrant step increments the
// turn counter, 0->3 decrements it. Past +4pi (or -4pi) the counter holds,
// so the phase falls back by 2pi: the error saw-tooths between 2pi and 4pi
// and keeps the right sign while a lock is being acquired.
// Bit layout, 9 stages, the turn counter and the overflow rule follow the
// paper; the rounding of the angle table and the clamping of the fine part
// to 0..1023 are this design's.
module cordic_phase #(
  parameter int IN_W     = 24,
  parameter int N_STAGES = 9,
  parameter int OUT_W    = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  i_in,
  input  logic signed [IN_W-1:0]  q_in,
  output logic signed [OUT_W-1:0] phase
);
  localparam int XW = IN_W + 4;
  localparam int FW = OUT_W - 4;              // fine bits, one quadrant = 2^FW
  // round(atan(2^-k) * 2^FW / (pi/2)) for k = 1..9, for FW = 10
  localparam int ATAN [1:9] = '{302, 160, 81, 41, 20, 10, 5, 3, 1};

  logic [1:0]            quad, quad_prev;
  logic signed [1:0]     turn;
  logic signed [XW-1:0]  x, y, xn, yn;
  logic signed [FW+2:0]  acc;
  logic [FW-1:0]         fine;

  always_comb begin
    // quadrant and coarse rotation into [0, pi/2)
    if (i_in > 0 && q_in >= 0)      begin quad = 2'd0; x = XW'(i_in);  y = XW'(q_in);  end
    else if (i_in <= 0 && q_in > 0) begin quad = 2'd1; x = XW'(q_in);  y = -XW'(i_in); end
    else if (i_in < 0 && q_in <= 0) begin quad = 2'd2; x = -XW'(i_in); y = -XW'(q_in); end
    else if (q_in < 0)              begin quad = 2'd3; x = -XW'(q_in); y = XW'(i_in);  end
    else                            begin quad = 2'd0; x = '0;         y = '0;         end
    // rotation by -pi/4 into [-pi/4, pi/4)
    xn  = x + y;
    yn  = y - x;
    x   = xn;
    y   = yn;
    acc = (FW+3)'(2**(FW-1));
    for (int k = 1; k <= N_STAGES; k++) begin
      if (y >= 0) begin
        xn  = x + (y >>> k);
        yn  = y - (x >>> k);
        acc = acc + (FW+3)'(ATAN[k]);
      end else begin
        xn  = x - (y >>> k);
        yn  = y + (x >>> k);
        acc = acc - (FW+3)'(ATAN[k]);
      end
      x = xn;
      y = yn;
    end
    if (acc < 0)                  fine = '0;
    else if (acc > 2**FW - 1)     fine = '1;
    else                          fine = FW'(acc);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      turn      <= '0;
      quad_prev <= '0;
      phase     <= '0;
    end else begin
      logic signed [1:0] t;
      t = turn;
      if (quad_prev == 2'd3 && quad == 2'd0 && turn != 2'sd1)  t = turn + 2'sd1;
      if (quad_prev == 2'd0 && quad == 2'd3 && turn != -2'sd2) t = turn - 2'sd1;
      turn      <= t;
      quad_prev <= quad;
      phase     <= {t, quad, fine};
    end
  end
endmodule
