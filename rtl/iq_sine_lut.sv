// iq_sine_lut: quarter-wave sine table with four read ports.
//
// The ROM holds 2^11 unsigned 17-bit samples of the first quarter period,
// entry i = round((2^17-1) * sin((i + 0.5) / 2^11 * pi/2)). The half-entry
// offset makes the quarter exactly mirror-symmetric, so the full period is
// rebuilt without an extra entry: for a 13-bit phase {quadrant, index},
// quadrants 0 and 1 read index and ~index, quadrants 2 and 3 do the same
// and negate. Each port returns an 18-bit signed sine one clock after its
// phase (registered). Four ports serve the four phase-shifted sines an IQ
// module needs (sin and cos of wt+phi for demodulation, of wt for
// modulation).
// The table size (2^11 x 17 bit) and the quarter-period storage follow the
// paper; the half-entry offset and the read latency are this design's.
module iq_sine_lut #(
  parameter int LUT_AW = 11,
  parameter int LUT_DW = 17,
  parameter int NPORT  = 4
) (
  input  logic                     clk,
  input  logic [LUT_AW+1:0]        phase [NPORT],
  output logic signed [LUT_DW:0]   sine  [NPORT]
);
  localparam int DEPTH = 2**LUT_AW;

  logic [LUT_DW-1:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++)
      rom[i] = LUT_DW'($rtoi((2.0**LUT_DW - 1.0) *
               $sin((real'(i) + 0.5) / real'(DEPTH) * 3.14159265358979323846 / 2.0) + 0.5));
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      logic [LUT_AW-1:0] idx;
      logic [LUT_DW-1:0] mag;
      idx = phase[p][LUT_AW] ? ~phase[p][LUT_AW-1:0] : phase[p][LUT_AW-1:0];
      mag = rom[idx];
      sine[p] <= phase[p][LUT_AW+1] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    end
  end
endmodule
