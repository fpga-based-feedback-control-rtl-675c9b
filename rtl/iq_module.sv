// iq_module: IQ demodulator / modulator with CORDIC phase detector and
// network-analyser accumulators.
//
// Signal path (one sample per clock):
//   input_signal -> optional first-order high-pass (ac) -> multiplied by
//   sin(wt+phi) and cos(wt+phi) -> two first-order low-pass stages on each
//   product -> quadrature 1 (sin branch) and quadrature 2 (cos branch),
//   kept at Q_W = 24 bits.
// The quadratures feed, in parallel:
//   - the CORDIC phase estimator (I = quadrature 2, Q = quadrature 1);
//   - the network-analyser accumulators (started by a frequency write);
//   - quadrature_factor * quadrature 1, the "quadrature" output;
//   - the re-modulator: (gain * quadrature 1 + amplitude) * sin(wt) +
//     gain * quadrature 2 * cos(wt) = output_direct.
// output_signal selects the quadrature output, output_direct or the
// CORDIC phase. The oscillator is a 32-bit phase accumulator advanced by
// `frequency` each clock; the 13 MSBs address a quarter-wave sine table.
// Scaling: gain = quadrature_factor = 2^12 is unity: with gain 1.0 a tone
// at the centre frequency passes with amplitude 1 and phase shifted by
// -phi; with quadrature_factor 1.0 the quadrature output equals the
// amplitude of the in-phase part of the input.
// Latency from input to output_direct about 8 clocks (filters 1+2,
// sine/product 2, modulation 2, output 1).
// The block structure, the registers and their roles, the 2^11 x 17-bit
// table and the 32-bit phase register follow the paper; fixed-point
// scalings, the output_signal encoding and the pipeline are this design's.
module iq_module
  import pyrpl_pkg::*;
#(
  parameter int GAIN_FRAC = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  iq_cfg_t                 cfg,
  input  logic                    freq_we,
  input  sig_t                    input_signal,
  output sig_t                    output_signal,
  output sig_t                    output_direct,
  output logic signed [NA_W-1:0]  na_acc1,
  output logic signed [NA_W-1:0]  na_acc2,
  output logic                    na_busy,
  output logic                    na_done,
  output sig_t                    phase_out
);
  localparam int SH = GAIN_FRAC + 9;   // quadrature -> output LSB at gain 1.0

  // ---- oscillator ----
  logic [31:0] ph_acc;
  logic [12:0] ph_demod;
  logic [12:0] lut_phase [4];
  logic signed [17:0] sine [4];      // 0 sin(wt+phi) 1 cos(wt+phi) 2 sin(wt) 3 cos(wt)

  always_ff @(posedge clk) begin
    if (!rst_n) ph_acc <= '0;
    else        ph_acc <= ph_acc + cfg.frequency;
  end
  assign ph_demod     = 13'((ph_acc + cfg.phase) >> 19);
  assign lut_phase[0] = ph_demod;
  assign lut_phase[1] = ph_demod + 13'd2048;
  assign lut_phase[2] = ph_acc[31:19];
  assign lut_phase[3] = ph_acc[31:19] + 13'd2048;

  iq_sine_lut #(.LUT_AW(11), .LUT_DW(17), .NPORT(4)) u_lut (
    .clk, .phase(lut_phase), .sine(sine));

  // ---- input high-pass ----
  sig_t x_hp;
  first_order_filter #(.W(SIG_W), .SHIFT_W(SHIFT_W), .FRAC(24)) u_ac (
    .clk, .rst_n, .en(cfg.ac.en), .highpass(1'b1), .shift(cfg.ac.shift),
    .x(input_signal), .y(x_hp));

  // ---- demodulation ----
  logic signed [Q_W-1:0] dem1, dem2;
  logic signed [SIG_W+17:0] prod1, prod2;   // full 14 x 18 bit products
  assign prod1 = x_hp * sine[0];
  assign prod2 = x_hp * sine[1];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dem1 <= '0;
      dem2 <= '0;
    end else begin
      dem1 <= Q_W'(prod1 >>> 7);
      dem2 <= Q_W'(prod2 >>> 7);
    end
  end

  // ---- low-pass filters ----
  logic signed [Q_W-1:0] lp1a, lp2a, quad1, quad2;
  first_order_filter #(.W(Q_W), .SHIFT_W(SHIFT_W), .FRAC(16)) u_lp1a (
    .clk, .rst_n, .en(cfg.lp[0].en), .highpass(1'b0), .shift(cfg.lp[0].shift), .x(dem1), .y(lp1a));
  first_order_filter #(.W(Q_W), .SHIFT_W(SHIFT_W), .FRAC(16)) u_lp1b (
    .clk, .rst_n, .en(cfg.lp[1].en), .highpass(1'b0), .shift(cfg.lp[1].shift), .x(lp1a), .y(quad1));
  first_order_filter #(.W(Q_W), .SHIFT_W(SHIFT_W), .FRAC(16)) u_lp2a (
    .clk, .rst_n, .en(cfg.lp[0].en), .highpass(1'b0), .shift(cfg.lp[0].shift), .x(dem2), .y(lp2a));
  first_order_filter #(.W(Q_W), .SHIFT_W(SHIFT_W), .FRAC(16)) u_lp2b (
    .clk, .rst_n, .en(cfg.lp[1].en), .highpass(1'b0), .shift(cfg.lp[1].shift), .x(lp2a), .y(quad2));

  // ---- CORDIC phase and network analyser ----
  cordic_phase #(.IN_W(Q_W), .N_STAGES(9), .OUT_W(SIG_W)) u_cordic (
    .clk, .rst_n, .i_in(quad2), .q_in(quad1), .phase(phase_out));

  na_accumulator #(.IN_W(Q_W), .ACC_W(NA_W), .CNT_W(32)) u_na (
    .clk, .rst_n, .start(freq_we), .sleep_cycles(cfg.sleep_cycles), .na_cycles(cfg.na_cycles),
    .q1(quad1), .q2(quad2), .acc1(na_acc1), .acc2(na_acc2), .busy(na_busy), .done(na_done));

  // ---- quadrature output and re-modulation ----
  localparam int PW = Q_W + 16;
  localparam int MW = SIG_W + 2;
  localparam logic signed [MW-1:0] MMAX = MW'(2**(SIG_W) - 1);
  localparam logic signed [MW-1:0] MMIN = -MW'(2**(SIG_W));

  function automatic logic signed [MW-1:0] satm(input logic signed [PW-1:0] v);
    if (v > PW'(MMAX))      return MMAX;
    else if (v < PW'(MMIN)) return MMIN;
    else                    return MW'(v);
  endfunction

  logic signed [MW-1:0] m1, m2;
  sig_t                 quad_out;
  logic signed [MW+18:0] mod;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m1       <= '0;
      m2       <= '0;
      quad_out <= '0;
      mod      <= '0;
      output_direct <= '0;
      output_signal <= '0;
    end else begin
      m1       <= satm(PW'((quad1 * cfg.gain) >>> SH) + PW'(cfg.amplitude));
      m2       <= satm(PW'((quad2 * cfg.gain) >>> SH));
      quad_out <= sat_sig(64'((quad1 * cfg.quadrature_factor) >>> SH));
      mod      <= (MW+19)'(m1 * sine[2]) + (MW+19)'(m2 * sine[3]);
      output_direct <= sat_sig(64'(mod >>> 17));
      unique case (cfg.output_signal)
        IQ_OUT_DIRECT: output_signal <= output_direct;
        IQ_OUT_CORDIC: output_signal <= phase_out;
        default:       output_signal <= quad_out;
      endcase
    end
  end
endmodule
