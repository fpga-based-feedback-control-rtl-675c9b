// dsp_mux: the DSP multiplexer, a 16-slot crossbar for 14-bit signals.
//
// Every module slot s has an input_select register; the slot's input is
// the output_signal of the slot that register names. All slots are
// routed in parallel every clock, and the routed signals are registered
// once, so a module sees the selected output one clock after it was
// produced. Ports are arrays indexed by slot; the slot numbers are listed
// in pyrpl_pkg (slot_e).
// The 16 slots, the 14-bit width and the per-slot input_select follow the
// paper; the register stage and the slot numbering are this design's.
module dsp_mux
#(
  parameter int N_MOD = 16,
  parameter int SW    = 14
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic signed [SW-1:0]       output_signal [N_MOD],
  input  logic [$clog2(N_MOD)-1:0]   input_select  [N_MOD],
  output logic signed [SW-1:0]       input_signal  [N_MOD]
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < N_MOD; s++) input_signal[s] <= '0;
    end else begin
      for (int s = 0; s < N_MOD; s++) input_signal[s] <= output_signal[input_select[s]];
    end
  end
endmodule
