// na_accumulator: network-analyser integration of the two quadratures.
//
// A start pulse (a write of the IQ frequency register) restarts a
// measurement: the block first waits sleep_cycles + 1 clocks to let the
// device under test settle, then adds q1 and q2 into two 62-bit
// accumulators on exactly na_cycles consecutive clocks, then raises done
// and holds the sums until the next start. busy is high from the start
// until done. The sums are cleared when integration begins.
// The two 62-bit accumulators and the sleep_cycles / na_cycles sequence
// follow the paper; the 32-bit counters and the handshake are this
// design's.
module na_accumulator #(
  parameter int IN_W  = 24,
  parameter int ACC_W = 62,
  parameter int CNT_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [CNT_W-1:0]        sleep_cycles,
  input  logic [CNT_W-1:0]        na_cycles,
  input  logic signed [IN_W-1:0]  q1,
  input  logic signed [IN_W-1:0]  q2,
  output logic signed [ACC_W-1:0] acc1,
  output logic signed [ACC_W-1:0] acc2,
  output logic                    busy,
  output logic                    done
);
  typedef enum logic [1:0] {S_IDLE, S_SLEEP, S_ACC, S_DONE} state_e;
  state_e           state;
  logic [CNT_W-1:0] cnt;

  assign busy = (state == S_SLEEP) || (state == S_ACC);
  assign done = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      acc1  <= '0;
      acc2  <= '0;
    end else if (start) begin
      state <= S_SLEEP;
      cnt   <= sleep_cycles;
    end else begin
      unique case (state)
        S_SLEEP: begin
          if (cnt == 0) begin
            state <= S_ACC;
            cnt   <= na_cycles;
            acc1  <= '0;
            acc2  <= '0;
          end else cnt <= cnt - 1'b1;
        end
        S_ACC: begin
          if (cnt == 0) state <= S_DONE;
          else begin
            acc1 <= acc1 + ACC_W'(q1);
            acc2 <= acc2 + ACC_W'(q2);
            cnt  <= cnt - 1'b1;
          end
        end
        default: ;
      endcase
    end
  end
endmodule
