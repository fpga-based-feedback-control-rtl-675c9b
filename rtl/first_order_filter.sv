// first_order_filter: one first-order IIR low-pass or high-pass stage.
//
// The low-pass keeps a state s with FRAC extra fractional bits and updates
// it every clock as s <= s + ((x << FRAC) - s) >>> shift, which is a
// one-pole filter with a cut-off near fclk / (2*pi*2^shift). The high-pass
// output is x minus the low-pass output, saturated to W bits. With en low
// the stage passes x through (still one register).
// Ports: x is sampled every clock, y is registered: latency one clock.
// The paper asks for first-order filters with selectable low-pass or
// high-pass cut-offs in front of the PID, at the IQ input and on the IQ
// quadratures; the power-of-two bandwidth steps are this design's choice.
module first_order_filter #(
  parameter int W       = 14,
  parameter int SHIFT_W = 5,
  parameter int FRAC    = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                highpass,
  input  logic [SHIFT_W-1:0]  shift,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int SW = W + FRAC + 2;
  localparam logic signed [W:0] YMAX = (W+1)'(2**(W-1) - 1);
  localparam logic signed [W:0] YMIN = -(W+1)'(2**(W-1));

  logic signed [SW-1:0] s, s_next, diff;
  logic signed [W:0]    lp, hp;

  always_comb begin
    diff   = (SW'(x) <<< FRAC) - s;
    s_next = s + (diff >>> shift);
    lp     = (W+1)'(s_next >>> FRAC);
    hp     = (W+1)'(x) - lp;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s <= '0;
      y <= '0;
    end else begin
      s <= en ? s_next : (SW'(x) <<< FRAC);
      if (!en)
        y <= x;
      else if (!highpass)
        y <= W'(lp);
      else if (hp > YMAX)
        y <= W'(YMAX);
      else if (hp < YMIN)
        y <= W'(YMIN);
      else
        y <= W'(hp);
    end
  end
endmodule
