// scope: two-channel oscilloscope with averaging decimation and trigger.
//
// Two circular buffers of 2^14 points store ch1 and ch2. With decimation
// 2^log_dec (log_dec = 0..16) each point is the mean of 2^log_dec
// consecutive input samples (sum, then arithmetic shift right). A pulse
// on `arm` clears the buffers' write pointer and starts acquisition; the
// scope then waits for its trigger: immediate, ch1 or ch2 crossing
// `threshold` upwards or downwards (the signal must first have been beyond
// threshold -/+ hysteresis, which suppresses noise re-triggers), the rising
// edge of trig_ext, or trig_sw at any time. At the trigger it stores the
// write pointer (trig_ptr) and a 64-bit time stamp (trig_time), records
// points until trig_ptr + trig_delay is written, then stops with done high
// (wr_ptr = trig_ptr + trig_delay + 1; trig_ptr holds the point that
// contains the trigger sample). In rolling mode it
// records continuously and never stops.
// Reads: rd_addr returns rd_ch1/rd_ch2 one clock later.
// The 2^14 points, the 2^n averaging decimation, trigger thresholds, time
// stamps and rolling mode follow the paper; the trigger encoding, the
// hysteresis rule and the stop rule are this design's.
module scope
  import pyrpl_pkg::*;
#(
  parameter int AW          = 14,
  parameter int MAX_LOG_DEC = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  scope_cfg_t    cfg,
  input  logic          arm,
  input  logic          trig_sw,
  input  logic          trig_ext,
  input  sig_t          ch1,
  input  sig_t          ch2,
  input  logic [AW-1:0] rd_addr,
  output sig_t          rd_ch1,
  output sig_t          rd_ch2,
  output logic [AW-1:0] wr_ptr,
  output logic [AW-1:0] trig_ptr,
  output logic          armed,
  output logic          done,
  output logic [63:0]   trig_time,
  output logic [63:0]   now
);
  localparam int SUM_W = SIG_W + MAX_LOG_DEC + 1;

  typedef enum logic [1:0] {SC_IDLE, SC_ARMED, SC_TRIGGERED, SC_DONE} sstate_e;
  sstate_e state;

  sig_t mem1 [2**AW];
  sig_t mem2 [2**AW];

  logic signed [SUM_W-1:0] sum1, sum2, s1, s2;
  logic [MAX_LOG_DEC:0]    dcnt;
  logic [4:0]              ld;
  logic                    point;       // a decimated point is complete this clock
  logic                    primed, trig, trig_ext_d;
  logic                    writing;

  assign ld      = (cfg.log_dec > 5'(MAX_LOG_DEC)) ? 5'(MAX_LOG_DEC) : cfg.log_dec;
  assign point   = (dcnt == (MAX_LOG_DEC+1)'((1 << ld) - 1));
  assign s1      = sum1 + SUM_W'(ch1);
  assign s2      = sum2 + SUM_W'(ch2);
  assign armed   = (state == SC_ARMED);
  assign done    = (state == SC_DONE);
  assign writing = cfg.rolling || state == SC_ARMED || state == SC_TRIGGERED;

  // trigger condition
  always_comb begin
    trig = trig_sw;
    unique case (cfg.trig_src)
      TRIG_IMMEDIATE: trig = 1'b1;
      TRIG_CH1_RISE:  if (primed && ch1 >= cfg.threshold) trig = 1'b1;
      TRIG_CH1_FALL:  if (primed && ch1 <= cfg.threshold) trig = 1'b1;
      TRIG_CH2_RISE:  if (primed && ch2 >= cfg.threshold) trig = 1'b1;
      TRIG_CH2_FALL:  if (primed && ch2 <= cfg.threshold) trig = 1'b1;
      TRIG_EXT:       if (trig_ext && !trig_ext_d) trig = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= SC_IDLE;
      sum1       <= '0;
      sum2       <= '0;
      dcnt       <= '0;
      wr_ptr     <= '0;
      trig_ptr   <= '0;
      trig_time  <= '0;
      now        <= '0;
      primed     <= 1'b0;
      trig_ext_d <= 1'b0;
    end else begin
      now        <= now + 64'd1;
      trig_ext_d <= trig_ext;

      // averaging decimator
      if (point) begin
        sum1 <= '0;
        sum2 <= '0;
        dcnt <= '0;
      end else begin
        sum1 <= s1;
        sum2 <= s2;
        dcnt <= dcnt + 1'b1;
      end
      if (point && writing) wr_ptr <= wr_ptr + 1'b1;

      // hysteresis: the signal must first be on the far side of the threshold
      unique case (cfg.trig_src)
        TRIG_CH1_RISE: if (ch1 < cfg.threshold - cfg.hysteresis) primed <= 1'b1;
        TRIG_CH1_FALL: if (ch1 > cfg.threshold + cfg.hysteresis) primed <= 1'b1;
        TRIG_CH2_RISE: if (ch2 < cfg.threshold - cfg.hysteresis) primed <= 1'b1;
        TRIG_CH2_FALL: if (ch2 > cfg.threshold + cfg.hysteresis) primed <= 1'b1;
        default: ;
      endcase

      if (arm) begin
        state  <= SC_ARMED;
        wr_ptr <= '0;
        dcnt   <= '0;
        sum1   <= '0;
        sum2   <= '0;
        primed <= 1'b0;
      end else begin
        unique case (state)
          SC_ARMED: if (trig && !cfg.rolling) begin
            state     <= SC_TRIGGERED;
            trig_ptr  <= wr_ptr;
            trig_time <= now;
            primed    <= 1'b0;
          end
          SC_TRIGGERED: if (point && (wr_ptr - trig_ptr) >= cfg.trig_delay) state <= SC_DONE;
          default: ;
        endcase
      end
    end
  end

  // buffers
  always_ff @(posedge clk) begin
    if (point && writing && !arm) begin
      mem1[wr_ptr] <= sig_t'(s1 >>> ld);
      mem2[wr_ptr] <= sig_t'(s2 >>> ld);
    end
    rd_ch1 <= mem1[rd_addr];
    rd_ch2 <= mem2[rd_addr];
  end
endmodule
