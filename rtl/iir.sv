// iir: IIR filter built as a sum of second-order sections computed by a
// single time-multiplexed biquad.
//
// The transfer function is H(z) = sum_j (b0_j + b1_j z^-1) /
// (1 + a1_j z^-1 + a2_j z^-2), j = 0..loops-1; a constant feed-through D
// is a section with b0 = D and the other coefficients 0. One section is
// evaluated per clock:
//   y_j(n) = b0 x(n) + b1 x(n-1) - a1 y_j(n-1) - a2 y_j(n-2)
// so the filter runs at the reduced rate fclk / loops. At the start of a
// period the (pre-filtered) input is sampled into x(n) and the previous
// sample moves to x(n-1); during the period the section outputs are summed
// and at its last clock the sum becomes output_signal. Latency from an
// input sample to the output that contains it: 2*loops clocks at most.
// Coefficients are 32-bit signed fixed point with 3 integer and 29
// fractional bits, written one at a time (coef_we, section, index 0 b0,
// 1 b1, 2 a1, 3 a2). The input is extended by X_FRAC fractional bits and
// section states are Y_W bits wide, saturating.
// A first-order low-pass in front avoids aliasing at the reduced rate.
// The single biquad, the cumulative sum, the 3.29 format, 14 sections and
// the anti-alias pre-filter follow the paper; X_FRAC, Y_W, saturation and
// the coefficient write port are this design's.
module iir
  import pyrpl_pkg::*;
#(
  parameter int N_SOS     = 14,
  parameter int COEF_W    = 32,
  parameter int COEF_FRAC = 29,
  parameter int X_FRAC    = 10,
  parameter int Y_W       = 40
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [3:0]               loops,
  input  logic                     coef_we,
  input  logic [3:0]               coef_sec,
  input  logic [1:0]               coef_idx,
  input  logic signed [COEF_W-1:0] coef_data,
  input  logic                     pre_en,
  input  logic [SHIFT_W-1:0]       pre_shift,
  input  sig_t                     input_signal,
  output sig_t                     output_signal
);
  localparam int XW = SIG_W + X_FRAC;
  localparam int PW = COEF_W + Y_W + 3;
  localparam int AW = Y_W + 4;
  localparam logic signed [PW-1:0] YMAX = PW'(2**(Y_W-1) - 1);
  localparam logic signed [PW-1:0] YMIN = -PW'(2**(Y_W-1));

  logic signed [COEF_W-1:0] coef [N_SOS][4];
  logic signed [Y_W-1:0]    y1 [N_SOS];
  logic signed [Y_W-1:0]    y2 [N_SOS];
  logic signed [XW-1:0]     x_cur, x_prev;
  logic [3:0]               k, last;
  logic signed [AW-1:0]     acc;
  sig_t                     x_f;

  first_order_filter #(.W(SIG_W), .SHIFT_W(SHIFT_W), .FRAC(24)) u_pre (
    .clk, .rst_n, .en(pre_en), .highpass(1'b0), .shift(pre_shift), .x(input_signal), .y(x_f));

  always_comb begin
    if (loops == 0)                last = 4'd0;
    else if (loops > 4'(N_SOS))    last = 4'(N_SOS - 1);
    else                           last = loops - 4'd1;
  end

  // one biquad
  logic signed [PW-1:0] s;
  logic signed [Y_W-1:0] yk;
  always_comb begin
    s = (PW'(coef[k][0]) * PW'(x_cur) + PW'(coef[k][1]) * PW'(x_prev)
       - PW'(coef[k][2]) * PW'(y1[k]) - PW'(coef[k][3]) * PW'(y2[k])) >>> COEF_FRAC;
    if (s > YMAX)      yk = Y_W'(YMAX);
    else if (s < YMIN) yk = Y_W'(YMIN);
    else               yk = Y_W'(s);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < N_SOS; j++) begin
        y1[j] <= '0;
        y2[j] <= '0;
        for (int c = 0; c < 4; c++) coef[j][c] <= '0;
      end
      x_cur  <= '0;
      x_prev <= '0;
      k      <= '0;
      acc    <= '0;
      output_signal <= '0;
    end else begin
      if (coef_we && coef_sec < 4'(N_SOS)) coef[coef_sec][coef_idx] <= coef_data;
      y1[k] <= yk;
      y2[k] <= y1[k];
      if (k >= last) begin
        k      <= '0;
        acc    <= '0;
        output_signal <= sat_sig(64'(acc + AW'(yk)) >>> X_FRAC);
        x_prev <= x_cur;
        x_cur  <= XW'(x_f) <<< X_FRAC;
      end else begin
        k   <= k + 4'd1;
        acc <= acc + AW'(yk);
      end
    end
  end
endmodule
