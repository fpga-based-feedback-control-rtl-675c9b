// dsp_regs: register decoder between the processor bus and the DSP block.
//
// Bus: 32-bit word accesses. A request is one clock with sys_wen or
// sys_ren high and a byte address; sys_ack (with sys_rdata for reads)
// follows exactly one clock later. sys_err flags an address nothing
// answers to. Write strobes that start an action (frequency write, ival
// write, arm, software triggers, table writes) are single-clock pulses
// issued in the request clock.
// Address bits 31:24 are not decoded (the processor's bus bridge selects
// this block with them), so the linter's unused-bits warning on sys_addr
// is expected. The data, address and index outputs that go with a write
// strobe (ival, seed, table address/data, coefficient section/index/data,
// scope read address) are bus bits wired straight through, 124 bits in
// all: the strobe, not a register, tells the module when to take them.
// Address map (byte addresses, bits 23:20 select the region):
//   0x1x_xxxx scope: 0x10_0000 control (W bit0 arm, bit1 sw trigger;
//             R {done, armed}), 04 trig_src, 08 threshold, 0C hysteresis,
//             10 log_dec, 14 trig_delay, 18 rolling, 20 wr_ptr, 24 trig_ptr,
//             28/2C trig_time lo/hi, 30/34 time now lo/hi (R);
//             0x11_0000 + 4i ch1 point i, 0x12_0000 + 4i ch2 point i (R).
//   0x2x_xxxx ASG: 0x20_0000 + 0x100*ch: 00 {noise, trig_src[1:0],
//             enable}, W bit4 = sw trigger, 04 step, 08 last, 0C cycles,
//             10 on_delay, 14 off_delay, 18 scale, 1C offset, 20 seed (W),
//             24 running (R); 0x21_0000 + 4i / 0x22_0000 + 4i table of
//             channel 0 / 1 (W).
//   0x3s_xxxx DSP module in multiplexer slot s: 00 input_select,
//             04 output_select, then per module type
//       PID: 08 setpoint, 0C p, 10 i, 14 d, 18 out_max, 1C out_min,
//            20 filters (7 bits each: {en, highpass, shift[4:0]}),
//            24 ival (W loads the integrator, R reads it back)
//       IQ:  08 frequency (W also starts a network-analyser point),
//            0C phase, 10 ac filter, 14 low-pass filters (2 x 7 bits),
//            18 gain, 1C quadrature_factor, 20 amplitude, 24 output_signal,
//            28 sleep_cycles, 2C na_cycles, 30/34 na_acc1 lo/hi,
//            38/3C na_acc2 lo/hi, 40 {na_done, na_busy}, 44 CORDIC phase (R)
//       IIR: 08 loops, 0C {pre_en, pre_shift[4:0]},
//            0x100 + 4*(4*section + index) coefficient (W)
// The input_select of slots 13 and 14 are the scope's two channel
// selects. Configuration registers read back what was written.
// That each module owns an address subspace follows the paper; the map
// itself and the bus handshake are this design's.
module dsp_regs
  import pyrpl_pkg::*;
#(
  parameter int N_PID = 3,
  parameter int N_IQ  = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // processor bus
  input  logic [31:0]           sys_addr,
  input  logic [31:0]           sys_wdata,
  input  logic                  sys_wen,
  input  logic                  sys_ren,
  output logic [31:0]           sys_rdata,
  output logic                  sys_ack,
  output logic                  sys_err,
  // multiplexer and summation
  output logic [SEL_W-1:0]      input_select  [N_MOD],
  output logic [1:0]            output_select [N_MOD],
  // PID
  output pid_cfg_t              pid_cfg  [N_PID],
  output logic [N_PID-1:0]      pid_ival_we,
  output sig_t                  pid_ival,
  input  sig_t                  pid_ival_rb [N_PID],
  // IQ
  output iq_cfg_t               iq_cfg [N_IQ],
  output logic [N_IQ-1:0]       iq_freq_we,
  input  logic signed [NA_W-1:0] iq_acc1 [N_IQ],
  input  logic signed [NA_W-1:0] iq_acc2 [N_IQ],
  input  logic [N_IQ-1:0]       iq_na_busy,
  input  logic [N_IQ-1:0]       iq_na_done,
  input  sig_t                  iq_phase [N_IQ],
  // IIR
  output logic [3:0]            iir_loops,
  output logic                  iir_pre_en,
  output logic [SHIFT_W-1:0]    iir_pre_shift,
  output logic                  iir_coef_we,
  output logic [3:0]            iir_coef_sec,
  output logic [1:0]            iir_coef_idx,
  output logic signed [31:0]    iir_coef_data,
  // ASG
  output asg_cfg_t              asg_cfg [2],
  output logic [1:0]            asg_trig_sw,
  output logic [1:0]            asg_seed_we,
  output logic [29:0]           asg_seed,
  output logic [1:0]            asg_wr_en,
  output logic [13:0]           asg_wr_addr,
  output sig_t                  asg_wr_data,
  input  logic [1:0]            asg_running,
  // scope
  output scope_cfg_t            scope_cfg,
  output logic                  scope_arm,
  output logic                  scope_trig_sw,
  output logic [13:0]           scope_rd_addr,
  input  sig_t                  scope_rd_ch1,
  input  sig_t                  scope_rd_ch2,
  input  logic [13:0]           scope_wr_ptr,
  input  logic [13:0]           scope_trig_ptr,
  input  logic                  scope_armed,
  input  logic                  scope_done,
  input  logic [63:0]           scope_trig_time,
  input  logic [63:0]           scope_now
);
  localparam int IQ0 = int'(SLOT_IQ0);

  logic [3:0]  region, slot;
  logic [3:0]  sub;
  logic [15:0] off;
  assign region = sys_addr[23:20];
  assign sub    = sys_addr[19:16];
  assign slot   = sys_addr[19:16];
  assign off    = sys_addr[15:0];

  logic [1:0] q_wr;
  assign q_wr = 2'(sys_addr[19:16] - 4'(IQ0));

  // ---- single-clock strobes (combinational from the request) ----
  always_comb begin
    pid_ival_we   = '0;
    pid_ival      = sig_t'(sys_wdata);
    iq_freq_we    = '0;
    iir_coef_we   = 1'b0;
    iir_coef_sec  = sys_addr[7:4];
    iir_coef_idx  = sys_addr[3:2];
    iir_coef_data = sys_wdata;
    asg_trig_sw   = '0;
    asg_seed_we   = '0;
    asg_seed      = sys_wdata[29:0];
    asg_wr_en     = '0;
    asg_wr_addr   = sys_addr[15:2];
    asg_wr_data   = sig_t'(sys_wdata);
    scope_arm     = 1'b0;
    scope_trig_sw = 1'b0;
    scope_rd_addr = sys_addr[15:2];
    if (sys_wen) begin
      unique case (region)
        4'h1: if (sub == 0 && off == 16'h00) begin
          scope_arm     = sys_wdata[0];
          scope_trig_sw = sys_wdata[1];
        end
        4'h2: begin
          if (sub == 0 && off[7:0] == 8'h00) asg_trig_sw[off[8]] = sys_wdata[4];
          if (sub == 0 && off[7:0] == 8'h20) asg_seed_we[off[8]] = 1'b1;
          if (sub == 1) asg_wr_en[0] = 1'b1;
          if (sub == 2) asg_wr_en[1] = 1'b1;
        end
        4'h3: begin
          if (slot < 4'(N_PID) && off == 16'h24) pid_ival_we[slot[1:0]] = 1'b1;
          if (int'(slot) >= IQ0 && int'(slot) < IQ0 + N_IQ && off == 16'h08)
            iq_freq_we[int'(slot) - IQ0] = 1'b1;
          if (slot == SLOT_IIR && off[15:8] == 8'h01) iir_coef_we = 1'b1;
        end
        default: ;
      endcase
    end
  end

  // ---- configuration registers ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < N_MOD; s++) begin
        input_select[s]  <= SLOT_NONE;
        output_select[s] <= OUT_NONE;
      end
      for (int p = 0; p < N_PID; p++) begin
        pid_cfg[p]         <= '0;
        pid_cfg[p].out_max <= SIG_MAX;
        pid_cfg[p].out_min <= SIG_MIN;
      end
      for (int q = 0; q < N_IQ; q++) iq_cfg[q] <= '0;
      iir_loops     <= 4'd1;
      iir_pre_en    <= 1'b0;
      iir_pre_shift <= '0;
      for (int a = 0; a < 2; a++) begin
        asg_cfg[a]       <= '0;
        asg_cfg[a].scale <= 16'sd8192;
        asg_cfg[a].last  <= '1;
      end
      scope_cfg <= '0;
    end else if (sys_wen) begin
      unique case (region)
        4'h1: if (sub == 0) begin
          unique case (off)
            16'h04: scope_cfg.trig_src   <= trig_src_e'(sys_wdata[2:0]);
            16'h08: scope_cfg.threshold  <= sig_t'(sys_wdata);
            16'h0C: scope_cfg.hysteresis <= sig_t'(sys_wdata);
            16'h10: scope_cfg.log_dec    <= sys_wdata[4:0];
            16'h14: scope_cfg.trig_delay <= sys_wdata[13:0];
            16'h18: scope_cfg.rolling    <= sys_wdata[0];
            default: ;
          endcase
        end
        4'h2: if (sub == 0) begin
          unique case (off[7:0])
            8'h00: begin
              asg_cfg[off[8]].enable   <= sys_wdata[0];
              asg_cfg[off[8]].trig_src <= sys_wdata[2:1];
              asg_cfg[off[8]].noise    <= sys_wdata[3];
            end
            8'h04: asg_cfg[off[8]].step      <= sys_wdata[29:0];
            8'h08: asg_cfg[off[8]].last      <= sys_wdata[13:0];
            8'h0C: asg_cfg[off[8]].cycles    <= sys_wdata[15:0];
            8'h10: asg_cfg[off[8]].on_delay  <= sys_wdata;
            8'h14: asg_cfg[off[8]].off_delay <= sys_wdata;
            8'h18: asg_cfg[off[8]].scale     <= sys_wdata[15:0];
            8'h1C: asg_cfg[off[8]].offset    <= sig_t'(sys_wdata);
            default: ;
          endcase
        end
        4'h3: begin
          if (off == 16'h00) input_select[slot]  <= sys_wdata[SEL_W-1:0];
          if (off == 16'h04) output_select[slot] <= sys_wdata[1:0];
          if (slot < 4'(N_PID)) begin
            unique case (off)
              16'h08: pid_cfg[slot[1:0]].setpoint <= sig_t'(sys_wdata);
              16'h0C: pid_cfg[slot[1:0]].p        <= sys_wdata[PID_GAIN_W-1:0];
              16'h10: pid_cfg[slot[1:0]].i        <= sys_wdata[PID_GAIN_W-1:0];
              16'h14: pid_cfg[slot[1:0]].d        <= sys_wdata[PID_GAIN_W-1:0];
              16'h18: pid_cfg[slot[1:0]].out_max  <= sig_t'(sys_wdata);
              16'h1C: pid_cfg[slot[1:0]].out_min  <= sig_t'(sys_wdata);
              16'h20: pid_cfg[slot[1:0]].filt     <= sys_wdata[7*PID_NFILT-1:0];
              default: ;
            endcase
          end
          if (int'(slot) >= IQ0 && int'(slot) < IQ0 + N_IQ) begin
            unique case (off)
              16'h08: iq_cfg[q_wr].frequency         <= sys_wdata;
              16'h0C: iq_cfg[q_wr].phase             <= sys_wdata;
              16'h10: iq_cfg[q_wr].ac                <= sys_wdata[6:0];
              16'h14: iq_cfg[q_wr].lp                <= sys_wdata[13:0];
              16'h18: iq_cfg[q_wr].gain              <= sys_wdata[15:0];
              16'h1C: iq_cfg[q_wr].quadrature_factor <= sys_wdata[15:0];
              16'h20: iq_cfg[q_wr].amplitude         <= sig_t'(sys_wdata);
              16'h24: iq_cfg[q_wr].output_signal     <= iq_out_e'(sys_wdata[1:0]);
              16'h28: iq_cfg[q_wr].sleep_cycles      <= sys_wdata;
              16'h2C: iq_cfg[q_wr].na_cycles         <= sys_wdata;
              default: ;
            endcase
          end
          if (slot == SLOT_IIR) begin
            if (off == 16'h08) iir_loops <= sys_wdata[3:0];
            if (off == 16'h0C) {iir_pre_en, iir_pre_shift} <= sys_wdata[5:0];
          end
        end
        default: ;
      endcase
    end
  end

  // ---- read path: address registered, data muxed in the ack clock ----
  logic [23:0] a_q;                 // bits 31:24 of the address are not decoded
  logic        ren_q;
  logic [31:0] rd;
  logic        hit;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sys_ack <= 1'b0;
      ren_q   <= 1'b0;
      a_q     <= '0;
    end else begin
      sys_ack <= sys_wen || sys_ren;
      ren_q   <= sys_ren;
      a_q     <= sys_addr[23:0];
    end
  end

  logic [3:0]  r, s;
  logic [15:0] o;
  logic [1:0]  q_rd;
  assign r    = a_q[23:20];
  assign s    = a_q[19:16];
  assign o    = a_q[15:0];
  assign q_rd = 2'(a_q[19:16] - 4'(IQ0));

  always_comb begin
    rd  = '0;
    hit = 1'b1;
    unique case (r)
      4'h1: begin
        if (s == 1)      rd = 32'(scope_rd_ch1);
        else if (s == 2) rd = 32'(scope_rd_ch2);
        else if (s == 0) begin
          unique case (o)
            16'h00: rd = {30'd0, scope_done, scope_armed};
            16'h04: rd = 32'(scope_cfg.trig_src);
            16'h08: rd = 32'(scope_cfg.threshold);
            16'h0C: rd = 32'(scope_cfg.hysteresis);
            16'h10: rd = 32'(scope_cfg.log_dec);
            16'h14: rd = 32'(scope_cfg.trig_delay);
            16'h18: rd = 32'(scope_cfg.rolling);
            16'h20: rd = 32'(scope_wr_ptr);
            16'h24: rd = 32'(scope_trig_ptr);
            16'h28: rd = scope_trig_time[31:0];
            16'h2C: rd = scope_trig_time[63:32];
            16'h30: rd = scope_now[31:0];
            16'h34: rd = scope_now[63:32];
            default: hit = 1'b0;
          endcase
        end else hit = 1'b0;
      end
      4'h2: begin
        if (s == 0) begin
          unique case (o[7:0])
            8'h00: rd = {28'd0, asg_cfg[o[8]].noise, asg_cfg[o[8]].trig_src, asg_cfg[o[8]].enable};
            8'h04: rd = 32'(asg_cfg[o[8]].step);
            8'h08: rd = 32'(asg_cfg[o[8]].last);
            8'h0C: rd = 32'(asg_cfg[o[8]].cycles);
            8'h10: rd = asg_cfg[o[8]].on_delay;
            8'h14: rd = asg_cfg[o[8]].off_delay;
            8'h18: rd = 32'(asg_cfg[o[8]].scale);
            8'h1C: rd = 32'(asg_cfg[o[8]].offset);
            8'h24: rd = 32'(asg_running[o[8]]);
            default: hit = 1'b0;
          endcase
        end else if (s > 2) hit = 1'b0;
      end
      4'h3: begin
        if (o == 16'h00)      rd = 32'(input_select[s]);
        else if (o == 16'h04) rd = 32'(output_select[s]);
        else if (s < 4'(N_PID)) begin
          unique case (o)
            16'h08: rd = 32'(pid_cfg[s[1:0]].setpoint);
            16'h0C: rd = 32'(pid_cfg[s[1:0]].p);
            16'h10: rd = 32'(pid_cfg[s[1:0]].i);
            16'h14: rd = 32'(pid_cfg[s[1:0]].d);
            16'h18: rd = 32'(pid_cfg[s[1:0]].out_max);
            16'h1C: rd = 32'(pid_cfg[s[1:0]].out_min);
            16'h20: rd = 32'(pid_cfg[s[1:0]].filt);
            16'h24: rd = 32'(pid_ival_rb[s[1:0]]);
            default: hit = 1'b0;
          endcase
        end else if (int'(s) >= IQ0 && int'(s) < IQ0 + N_IQ) begin
          unique case (o)
            16'h08: rd = iq_cfg[q_rd].frequency;
            16'h0C: rd = iq_cfg[q_rd].phase;
            16'h10: rd = 32'(iq_cfg[q_rd].ac);
            16'h14: rd = 32'(iq_cfg[q_rd].lp);
            16'h18: rd = 32'(iq_cfg[q_rd].gain);
            16'h1C: rd = 32'(iq_cfg[q_rd].quadrature_factor);
            16'h20: rd = 32'(iq_cfg[q_rd].amplitude);
            16'h24: rd = 32'(iq_cfg[q_rd].output_signal);
            16'h28: rd = iq_cfg[q_rd].sleep_cycles;
            16'h2C: rd = iq_cfg[q_rd].na_cycles;
            16'h30: rd = iq_acc1[q_rd][31:0];
            16'h34: rd = 32'(iq_acc1[q_rd][NA_W-1:32]);
            16'h38: rd = iq_acc2[q_rd][31:0];
            16'h3C: rd = 32'(iq_acc2[q_rd][NA_W-1:32]);
            16'h40: rd = {30'd0, iq_na_done[q_rd], iq_na_busy[q_rd]};
            16'h44: rd = 32'(iq_phase[q_rd]);
            default: hit = 1'b0;
          endcase
        end else if (s == SLOT_IIR) begin
          if (o == 16'h08)      rd = 32'(iir_loops);
          else if (o == 16'h0C) rd = {26'd0, iir_pre_en, iir_pre_shift};
          else if (o[15:8] != 8'h01) hit = 1'b0;
        end
      end
      default: hit = 1'b0;
    endcase
  end

  assign sys_rdata = ren_q ? rd : '0;
  assign sys_err   = sys_ack && !hit;
endmodule
