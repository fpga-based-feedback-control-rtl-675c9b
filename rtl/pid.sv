// pid: proportional-integral-derivative controller with pre-filters,
// a writable integrator and an output saturation stage.
//
// Signal path, one sample per clock:
//   input -> N_FILT first-order filters in series (each off, low-pass or
//   high-pass) -> error e = x - setpoint -> P, I and D terms -> sum ->
//   clamp to [out_min, out_max] -> output_signal.
// P = p*e / 2^PSR, D = d*(e[n]-e[n-1]) / 2^DSR, and the integrator adds
// i*e every clock and is read as integ / 2^ISR. The integrator is clamped
// to the 14-bit output range so it cannot wind up beyond what the output
// can show. Writing ival (ival_we) loads the integrator with ival in output
// LSB, which lets software reset it or step it to make ramps.
// Latency: N_FILT clocks of filters, then 3 clocks (error, terms, sum).
// The PID law, the ival register, the four series filters and the
// saturation follow the paper; the fixed-point scalings (PSR, ISR, DSR),
// the integrator clamp and the pipeline are this design's choice.
module pid
  import pyrpl_pkg::*;
#(
  parameter int GAIN_W = 24,
  parameter int PSR    = 12,
  parameter int ISR    = 32,
  parameter int DSR    = 10
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pid_cfg_t cfg,
  input  logic     ival_we,
  input  sig_t     ival,
  input  sig_t     input_signal,
  output sig_t     output_signal,
  output sig_t     ival_out
);
  localparam int EW   = SIG_W + 1;
  localparam int IW   = ISR + SIG_W + 2;
  localparam int TW   = EW + GAIN_W + 1;
  localparam logic signed [IW-1:0] IMAX = IW'(signed'(SIG_MAX)) <<< ISR;
  localparam logic signed [IW-1:0] IMIN = IW'(signed'(SIG_MIN)) <<< ISR;

  // pre-filter chain
  sig_t fchain [PID_NFILT+1];
  assign fchain[0] = input_signal;
  for (genvar f = 0; f < PID_NFILT; f++) begin : g_filt
    first_order_filter #(.W(SIG_W), .SHIFT_W(SHIFT_W), .FRAC(24)) u_filt (
      .clk, .rst_n,
      .en(cfg.filt[f].en), .highpass(cfg.filt[f].highpass), .shift(cfg.filt[f].shift),
      .x(fchain[f]), .y(fchain[f+1]));
  end

  logic signed [EW-1:0] err, err_prev;
  logic signed [TW-1:0] p_term, d_term;
  logic signed [IW-1:0] integ, integ_next;

  always_comb begin
    logic signed [IW:0] t;
    t = IW'(integ) + (IW+1)'(err * cfg.i);
    if (t > (IW+1)'(IMAX))      integ_next = IMAX;
    else if (t < (IW+1)'(IMIN)) integ_next = IMIN;
    else               integ_next = IW'(t);
  end

  assign ival_out = sig_t'(integ >>> ISR);

  logic signed [EW:0] derr;             // error difference for the D term
  assign derr = (EW+1)'(err) - (EW+1)'(err_prev);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      err           <= '0;
      err_prev      <= '0;
      p_term        <= '0;
      d_term        <= '0;
      integ         <= '0;
      output_signal <= '0;
    end else begin
      err      <= EW'(fchain[PID_NFILT]) - EW'(cfg.setpoint);
      err_prev <= err;
      p_term   <= TW'((err * cfg.p) >>> PSR);
      d_term   <= TW'((derr * cfg.d) >>> DSR);
      if (ival_we) integ <= IW'(signed'(ival)) <<< ISR;
      else         integ <= integ_next;
      begin
        logic signed [IW+1:0] s;
        s = (IW+2)'(p_term) + (IW+2)'(d_term) + (IW+2)'(integ >>> ISR);
        if (s > (IW+2)'(cfg.out_max))      output_signal <= cfg.out_max;
        else if (s < (IW+2)'(cfg.out_min)) output_signal <= cfg.out_min;
        else                               output_signal <= sig_t'(s);
      end
    end
  end
endmodule
