// out_sum: output summation stage in front of the two DACs.
//
// Each module slot has a 2-bit output_select: bit 0 adds the slot's
// output_direct to analog output 1, bit 1 to analog output 2 (0 none,
// 3 both). The two sums are formed in a wide adder tree, saturated to the
// 14-bit DAC range and registered: latency one clock.
// The per-module 2-bit select and the summation follow the paper; the
// saturation and the register are this design's choice.
module out_sum
#(
  parameter int N_MOD = 16,
  parameter int SW    = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [SW-1:0] output_direct [N_MOD],
  input  logic [1:0]           output_select [N_MOD],
  output logic signed [SW-1:0] dac1,
  output logic signed [SW-1:0] dac2
);
  localparam int AW = SW + $clog2(N_MOD) + 1;
  localparam logic signed [AW-1:0] MAXV = AW'(2**(SW-1) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(2**(SW-1));

  logic signed [AW-1:0] sum1, sum2;

  always_comb begin
    sum1 = '0;
    sum2 = '0;
    for (int s = 0; s < N_MOD; s++) begin
      if (output_select[s][0]) sum1 += AW'(output_direct[s]);
      if (output_select[s][1]) sum2 += AW'(output_direct[s]);
    end
  end

  function automatic logic signed [SW-1:0] sat(input logic signed [AW-1:0] v);
    if (v > MAXV)      return SW'(MAXV);
    else if (v < MINV) return SW'(MINV);
    else               return SW'(v);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dac1 <= '0;
      dac2 <= '0;
    end else begin
      dac1 <= sat(sum1);
      dac2 <= sat(sum2);
    end
  end
endmodule
