// pyrpl_top: the complete DSP block of the feedback controller.
//
// Between the two ADCs and the two DACs (14-bit two's complement, one
// sample per 125 MHz clock) it holds three PID controllers, three IQ
// modules, one IIR filter, two ASG channels and a two-channel scope. The
// DSP multiplexer routes any module's output_signal (or in1, in2, out1,
// out2) to any module's input, and the output summation adds the
// output_direct of every module that is routed to out1 and/or out2 before
// the DACs. All registers are reached through a 32-bit request/ack bus
// (see dsp_regs for the map), so the signal chain can be rewired at run
// time without rebuilding the FPGA design.
// Multiplexer slots: 0-2 PID, 3-5 IQ, 6 IIR, 7-8 ASG, 9-10 in1/in2,
// 11-12 out1/out2 (the DAC values), 13-14 scope channel inputs (their
// input_select only), 15 constant zero. The ASG channels have no input.
// For the PID, ASG and IIR, output_direct equals output_signal; the IQ
// modules have a separate output_direct.
// The module set and the routing follow the paper; the slot numbering and
// the register bus are this design's.
module pyrpl_top
  import pyrpl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  sig_t        adc1,
  input  sig_t        adc2,
  output sig_t        dac1,
  output sig_t        dac2,
  input  logic        trig_ext,
  input  logic [31:0] sys_addr,
  input  logic [31:0] sys_wdata,
  input  logic        sys_wen,
  input  logic        sys_ren,
  output logic [31:0] sys_rdata,
  output logic        sys_ack,
  output logic        sys_err
);
  localparam int N_PID = 3;
  localparam int N_IQ  = 3;

  sig_t             out_sig  [N_MOD];
  sig_t             out_dir  [N_MOD];
  sig_t             in_sig   [N_MOD];
  logic [SEL_W-1:0] in_sel   [N_MOD];
  logic [1:0]       out_sel  [N_MOD];

  pid_cfg_t         pid_cfg [N_PID];
  logic [N_PID-1:0] pid_ival_we;
  sig_t             pid_ival;
  sig_t             pid_ival_rb [N_PID];
  iq_cfg_t          iq_cfg [N_IQ];
  logic [N_IQ-1:0]  iq_freq_we, iq_na_busy, iq_na_done;
  logic signed [NA_W-1:0] iq_acc1 [N_IQ];
  logic signed [NA_W-1:0] iq_acc2 [N_IQ];
  sig_t             iq_phase [N_IQ];
  logic [3:0]       iir_loops, iir_coef_sec;
  logic             iir_pre_en, iir_coef_we;
  logic [SHIFT_W-1:0] iir_pre_shift;
  logic [1:0]       iir_coef_idx;
  logic signed [31:0] iir_coef_data;
  asg_cfg_t         asg_cfg [2];
  logic [1:0]       asg_trig_sw, asg_seed_we, asg_wr_en, asg_running;
  logic [29:0]      asg_seed;
  logic [13:0]      asg_wr_addr;
  sig_t             asg_wr_data;
  scope_cfg_t       scope_cfg;
  logic             scope_arm, scope_trig_sw, scope_armed, scope_done;
  logic [13:0]      scope_rd_addr, scope_wr_ptr, scope_trig_ptr;
  sig_t             scope_rd_ch1, scope_rd_ch2;
  logic [63:0]      scope_trig_time, scope_now;

  dsp_regs #(.N_PID(N_PID), .N_IQ(N_IQ)) u_regs (
    .clk, .rst_n, .sys_addr, .sys_wdata, .sys_wen, .sys_ren, .sys_rdata, .sys_ack, .sys_err,
    .input_select(in_sel), .output_select(out_sel),
    .pid_cfg, .pid_ival_we, .pid_ival, .pid_ival_rb,
    .iq_cfg, .iq_freq_we, .iq_acc1, .iq_acc2, .iq_na_busy, .iq_na_done, .iq_phase,
    .iir_loops, .iir_pre_en, .iir_pre_shift, .iir_coef_we, .iir_coef_sec, .iir_coef_idx, .iir_coef_data,
    .asg_cfg, .asg_trig_sw, .asg_seed_we, .asg_seed, .asg_wr_en, .asg_wr_addr, .asg_wr_data, .asg_running,
    .scope_cfg, .scope_arm, .scope_trig_sw, .scope_rd_addr, .scope_rd_ch1, .scope_rd_ch2,
    .scope_wr_ptr, .scope_trig_ptr, .scope_armed, .scope_done, .scope_trig_time, .scope_now);

  dsp_mux #(.N_MOD(N_MOD), .SW(SIG_W)) u_mux (
    .clk, .rst_n, .output_signal(out_sig), .input_select(in_sel), .input_signal(in_sig));

  for (genvar p = 0; p < N_PID; p++) begin : g_pid
    pid u_pid (
      .clk, .rst_n, .cfg(pid_cfg[p]), .ival_we(pid_ival_we[p]), .ival(pid_ival),
      .input_signal(in_sig[int'(SLOT_PID0) + p]), .output_signal(out_sig[int'(SLOT_PID0) + p]),
      .ival_out(pid_ival_rb[p]));
    assign out_dir[int'(SLOT_PID0) + p] = out_sig[int'(SLOT_PID0) + p];
  end

  for (genvar q = 0; q < N_IQ; q++) begin : g_iq
    iq_module u_iq (
      .clk, .rst_n, .cfg(iq_cfg[q]), .freq_we(iq_freq_we[q]),
      .input_signal(in_sig[int'(SLOT_IQ0) + q]),
      .output_signal(out_sig[int'(SLOT_IQ0) + q]), .output_direct(out_dir[int'(SLOT_IQ0) + q]),
      .na_acc1(iq_acc1[q]), .na_acc2(iq_acc2[q]), .na_busy(iq_na_busy[q]), .na_done(iq_na_done[q]),
      .phase_out(iq_phase[q]));
  end

  iir u_iir (
    .clk, .rst_n, .loops(iir_loops), .coef_we(iir_coef_we), .coef_sec(iir_coef_sec),
    .coef_idx(iir_coef_idx), .coef_data(iir_coef_data), .pre_en(iir_pre_en), .pre_shift(iir_pre_shift),
    .input_signal(in_sig[SLOT_IIR]), .output_signal(out_sig[SLOT_IIR]));
  assign out_dir[SLOT_IIR] = out_sig[SLOT_IIR];

  for (genvar a = 0; a < 2; a++) begin : g_asg
    asg u_asg (
      .clk, .rst_n, .cfg(asg_cfg[a]), .trig_ext, .trig_sw(asg_trig_sw[a]),
      .seed_we(asg_seed_we[a]), .seed(asg_seed),
      .wr_en(asg_wr_en[a]), .wr_addr(asg_wr_addr), .wr_data(asg_wr_data),
      .output_signal(out_sig[int'(SLOT_ASG0) + a]), .running(asg_running[a]));
    assign out_dir[int'(SLOT_ASG0) + a] = out_sig[int'(SLOT_ASG0) + a];
  end

  scope u_scope (
    .clk, .rst_n, .cfg(scope_cfg), .arm(scope_arm), .trig_sw(scope_trig_sw), .trig_ext,
    .ch1(in_sig[SLOT_SCOPE1]), .ch2(in_sig[SLOT_SCOPE2]), .rd_addr(scope_rd_addr),
    .rd_ch1(scope_rd_ch1), .rd_ch2(scope_rd_ch2), .wr_ptr(scope_wr_ptr), .trig_ptr(scope_trig_ptr),
    .armed(scope_armed), .done(scope_done), .trig_time(scope_trig_time), .now(scope_now));

  // sources without a module: ADCs, DAC read-back, scope slots, zero
  assign out_sig[SLOT_IN1]    = adc1;
  assign out_sig[SLOT_IN2]    = adc2;
  assign out_sig[SLOT_OUT1]   = dac1;
  assign out_sig[SLOT_OUT2]   = dac2;
  assign out_sig[SLOT_SCOPE1] = '0;
  assign out_sig[SLOT_SCOPE2] = '0;
  assign out_sig[SLOT_NONE]   = '0;
  for (genvar s = int'(SLOT_IN1); s < N_MOD; s++) begin : g_nodir
    assign out_dir[s] = '0;
  end

  out_sum #(.N_MOD(N_MOD), .SW(SIG_W)) u_sum (
    .clk, .rst_n, .output_direct(out_dir), .output_select(out_sel), .dac1, .dac2);
endmodule
