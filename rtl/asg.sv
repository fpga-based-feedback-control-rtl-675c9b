// asg: one channel of the arbitrary signal generator.
//
// A 2^14-entry table of 14-bit samples is played back through a 30-bit
// pointer (14 index bits, 16 fractional bits) advanced by `step` each
// clock and wrapped after table entry `last`, so the period is
// (last+1) * 2^16 / step clocks: step 1 gives 0.116 Hz, step 2^29 with a
// full table 62.5 MHz at 125 MHz. In noise mode the top 14 bits of a
// Lehmer generator replace the table. The sample is scaled
// (scale 2^13 = 1.0), offset and saturated.
// Sequencing (state machine): once enabled, the channel waits for its
// trigger (immediate, rising edge of trig_ext, or trig_sw), then on_delay
// clocks, then runs. It stops after `cycles` periods (0 = continuous) or
// after off_delay clocks of running (0 = never), and then waits for the
// next trigger; with the immediate trigger it stays stopped until enable
// is cleared. While not running the output is `offset`.
// Table writes (wr_en, wr_addr, wr_data) may happen at any time.
// Only the top 14 bits of the noise generator are used; its low bits are
// poorly random, which is why the linter reports rnd[15:0] as unused.
// Latency: output two clocks after the pointer (table read, output
// register).
// The table length, the frequency range, burst operation, delayed turn-on
// and turn-off after an external trigger and the Lehmer noise source
// follow the paper; the encodings and the state machine are this design's.
module asg
  import pyrpl_pkg::*;
#(
  parameter int AW   = 14,
  parameter int FRAC = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  asg_cfg_t       cfg,
  input  logic           trig_ext,
  input  logic           trig_sw,
  input  logic           seed_we,
  input  logic [29:0]    seed,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  sig_t           wr_data,
  output sig_t           output_signal,
  output logic           running
);
  localparam int PTR_W = AW + FRAC;

  typedef enum logic [1:0] {A_IDLE, A_WAIT, A_RUN, A_DONE} astate_e;
  astate_e state;

  sig_t              table_mem [2**AW];
  sig_t              sample;
  logic [PTR_W-1:0]  ptr;
  logic [PTR_W:0]    ptr_sum, ptr_end;
  logic [31:0]       dcnt;
  logic [15:0]       periods;
  logic              trig_ext_d, trig, run_d;
  logic [29:0]       rnd;

  lehmer_prng #(.M_W(30), .MULT(32'd69069)) u_prng (
    .clk, .rst_n, .seed_we, .seed, .rnd);

  always_ff @(posedge clk) begin
    if (wr_en) table_mem[wr_addr] <= wr_data;
  end

  always_comb begin
    unique case (cfg.trig_src)
      2'd0:    trig = 1'b1;
      2'd1:    trig = trig_ext && !trig_ext_d;
      default: trig = trig_sw;
    endcase
    ptr_sum = (PTR_W+1)'(ptr) + (PTR_W+1)'(cfg.step);
    ptr_end = {1'b0, cfg.last, {FRAC{1'b0}}} + (PTR_W+1)'(2**FRAC);
  end

  assign running = (state == A_RUN);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= A_IDLE;
      ptr        <= '0;
      dcnt       <= '0;
      periods    <= '0;
      trig_ext_d <= 1'b0;
    end else begin
      trig_ext_d <= trig_ext;
      if (!cfg.enable) begin
        state <= A_IDLE;
        ptr   <= '0;
      end else begin
        unique case (state)
          A_IDLE: if (trig) begin
            state <= A_WAIT;
            dcnt  <= cfg.on_delay;
          end
          A_WAIT: begin
            if (dcnt == 0) begin
              state   <= A_RUN;
              ptr     <= '0;
              periods <= '0;
              dcnt    <= cfg.off_delay;
            end else dcnt <= dcnt - 1'b1;
          end
          A_RUN: begin
            logic stop;
            stop = 1'b0;
            if (ptr_sum >= ptr_end) begin
              ptr     <= PTR_W'(ptr_sum - ptr_end);
              periods <= periods + 1'b1;
              if (cfg.cycles != 0 && periods + 1'b1 == cfg.cycles) stop = 1'b1;
            end else ptr <= PTR_W'(ptr_sum);
            if (cfg.off_delay != 0) begin
              if (dcnt <= 1) stop = 1'b1;
              else           dcnt <= dcnt - 1'b1;
            end
            if (stop) begin
              ptr   <= '0;
              state <= (cfg.trig_src == 2'd0) ? A_DONE : A_IDLE;
            end
          end
          default: ;   // A_DONE: wait for enable to drop
        endcase
      end
    end
  end

  // table read, scaling and output
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sample        <= '0;
      run_d         <= 1'b0;
      output_signal <= '0;
    end else begin
      sample <= cfg.noise ? sig_t'(rnd[29:16]) : table_mem[ptr[PTR_W-1:FRAC]];
      run_d  <= running;
      if (run_d)
        output_signal <= sat_sig(64'((sample * cfg.scale) >>> 13) + 64'(cfg.offset));
      else
        output_signal <= cfg.offset;
    end
  end
endmodule
