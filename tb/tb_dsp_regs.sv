// tb_dsp_regs: bus handshake, write / read-back, action strobes and error
// flag of the register decoder.
//  - reset values (input_select = none, out_max = +max, ASG scale 1.0,
//    IIR loops 1) read back;
//  - a write in each region reaches the right configuration field and
//    reads back (signed values sign-extended);
//  - ack comes exactly one clock after each request and lasts one clock;
//  - frequency / ival / table / coefficient / arm writes give exactly one
//    strobe pulse with the right index, address and data;
//  - the scope sample read returns the point at the requested address;
//  - the 62-bit network-analyser accumulator reads back as two words;
//  - unmapped addresses give sys_err with the ack, mapped ones do not.
`timescale 1ns/1ps
`include "tb_util.svh"
module tb_dsp_regs;
  import pyrpl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] sys_addr = 0, sys_wdata = 0, sys_rdata, d;
  logic sys_wen = 0, sys_ren = 0, sys_ack, sys_err;
  logic [SEL_W-1:0] input_select [N_MOD];
  logic [1:0] output_select [N_MOD];
  pid_cfg_t pid_cfg [3];
  logic [2:0] pid_ival_we;
  sig_t pid_ival;
  sig_t pid_ival_rb [3];
  iq_cfg_t iq_cfg [3];
  logic [2:0] iq_freq_we;
  logic signed [NA_W-1:0] iq_acc1 [3], iq_acc2 [3];
  logic [2:0] iq_na_busy, iq_na_done;
  sig_t iq_phase [3];
  logic [3:0] iir_loops, iir_coef_sec;
  logic iir_pre_en, iir_coef_we;
  logic [SHIFT_W-1:0] iir_pre_shift;
  logic [1:0] iir_coef_idx;
  logic signed [31:0] iir_coef_data;
  asg_cfg_t asg_cfg [2];
  logic [1:0] asg_trig_sw, asg_seed_we, asg_wr_en, asg_running;
  logic [29:0] asg_seed;
  logic [13:0] asg_wr_addr, scope_rd_addr;
  sig_t asg_wr_data, scope_rd_ch1, scope_rd_ch2;
  scope_cfg_t scope_cfg;
  logic scope_arm, scope_trig_sw, scope_armed, scope_done;
  logic [13:0] scope_wr_ptr, scope_trig_ptr;
  logic [63:0] scope_trig_time, scope_now;
  int n_ival, n_freq, n_wr, n_coef, n_arm, n_ack, n_trig;
  logic [13:0] last_wr_addr;
  sig_t last_wr_data;
  logic [3:0] last_sec;
  logic [1:0] last_idx;
  logic signed [61:0] acc_rb;
  always #4 clk = ~clk;

  dsp_regs dut (.*);

  // stimulus for the read-only inputs
  assign pid_ival_rb = '{14'sd11, -14'sd22, 14'sd33};
  assign iq_acc1 = '{62'sd0, -62'sd123456789012, 62'sd5};
  assign iq_acc2 = '{62'sd1, 62'sd2, 62'sd3};
  assign iq_na_busy = 3'b010;
  assign iq_na_done = 3'b100;
  assign iq_phase = '{14'sd0, 14'sd100, -14'sd100};
  assign asg_running = 2'b10;
  assign scope_wr_ptr = 14'd77;
  assign scope_trig_ptr = 14'd12;
  assign scope_armed = 1'b1;
  assign scope_done = 1'b0;
  assign scope_trig_time = 64'h0000_0012_3456_789A;
  assign scope_now = 64'd999;
  // scope memory model: registered read, value = 3 * address
  always_ff @(posedge clk) begin
    scope_rd_ch1 <= sig_t'(scope_rd_addr * 3);
    scope_rd_ch2 <= -sig_t'(scope_rd_addr);
  end

  // strobe counters
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_ival <= 0; n_freq <= 0; n_wr <= 0; n_coef <= 0; n_arm <= 0; n_ack <= 0; n_trig <= 0;
      last_wr_addr <= '0; last_wr_data <= '0; last_sec <= '0; last_idx <= '0;
    end else begin
      if (pid_ival_we[1]) n_ival <= n_ival + 1;
      if (iq_freq_we[1]) n_freq <= n_freq + 1;
      if (asg_wr_en[1]) begin n_wr <= n_wr + 1; last_wr_addr <= asg_wr_addr; last_wr_data <= asg_wr_data; end
      if (iir_coef_we) begin n_coef <= n_coef + 1; last_sec <= iir_coef_sec; last_idx <= iir_coef_idx; end
      if (scope_arm) n_arm <= n_arm + 1;
      if (asg_trig_sw[0]) n_trig <= n_trig + 1;
      if (sys_ack) n_ack <= n_ack + 1;
    end
  end

  task automatic wr(input logic [31:0] a, input logic [31:0] v);
    @(negedge clk); sys_addr = a; sys_wdata = v; sys_wen = 1;
    `CHECK(!sys_ack, "no ack in the request clock")
    @(negedge clk); sys_wen = 0;
    `CHECK(sys_ack, "write ack one clock later")
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] v);
    @(negedge clk); sys_addr = a; sys_ren = 1;
    @(negedge clk); sys_ren = 0;
    `CHECK(sys_ack, "read ack one clock later")
    v = sys_rdata;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); `TB_FINISH
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    rd(32'h30_0000, d); `CHECK(d == 32'd15, "input_select reset = none")
    rd(32'h30_0018, d); `CHECK(d == 32'd8191, "PID out_max reset = +max")
    rd(32'h20_0118, d); `CHECK(d == 32'd8192, "ASG scale reset = 1.0")
    rd(32'h36_0008, d); `CHECK(d == 32'd1, "IIR loops reset = 1")
    // PID 1
    wr(32'h31_0008, -32'sd123);
    `CHECK(pid_cfg[1].setpoint == -14'sd123, "PID1 setpoint field")
    rd(32'h31_0008, d); `CHECK(d == -32'sd123, "PID1 setpoint sign-extended read-back")
    wr(32'h31_000C, 32'h0012_3456);
    `CHECK(pid_cfg[1].p == 24'h12_3456 && pid_cfg[0].p == 0, "PID1 p only")
    wr(32'h31_0024, 32'd500);
    `CHECK(n_ival == 1, "ival strobe once")
    rd(32'h31_0024, d); `CHECK(d == -32'sd22, "ival read-back")
    // multiplexer
    wr(32'h3C_0000, 32'd7);
    `CHECK(input_select[12] == 4'd7, "out2 input_select")
    wr(32'h37_0004, 32'd3);
    `CHECK(output_select[7] == 2'd3, "ASG0 output_select both")
    // IQ 1 (slot 4)
    wr(32'h34_0008, 32'h0123_4567);
    `CHECK(n_freq == 1, "frequency write strobe once")
    `CHECK(iq_cfg[1].frequency == 32'h0123_4567 && iq_cfg[0].frequency == 0, "IQ1 frequency field")
    rd(32'h34_0008, d); `CHECK(d == 32'h0123_4567, "IQ1 frequency read-back")
    rd(32'h34_0030, d); acc_rb[31:0] = d;
    rd(32'h34_0034, d); acc_rb[61:32] = d[29:0];
    `CHECK(acc_rb == -62'sd123456789012, "62-bit accumulator read as two words")
    rd(32'h34_0040, d); `CHECK(d == 32'd1, "NA busy flag")
    rd(32'h35_0044, d); `CHECK(d == -32'sd100, "CORDIC phase read")
    // IIR
    wr(32'h36_0008, 32'd14);
    `CHECK(iir_loops == 4'd14, "IIR loops")
    wr(32'h36_0100 + 4 * (4 * 9 + 2), 32'h1234);
    `CHECK(n_coef == 1 && last_sec == 4'd9 && last_idx == 2'd2, "coefficient strobe section/index")
    // ASG
    wr(32'h20_0104, 32'h0100_0000);
    `CHECK(asg_cfg[1].step == 30'h0100_0000 && asg_cfg[0].step == 0, "ASG1 step")
    wr(32'h22_0000 + 4 * 100, 32'h0000_1F00);
    `CHECK(n_wr == 1 && last_wr_addr == 14'd100 && last_wr_data == sig_t'(14'h1F00), "ASG1 table write")
    wr(32'h20_0000, 32'h11);
    `CHECK(n_trig == 1 && asg_cfg[0].enable, "ASG0 enable and software trigger")
    rd(32'h20_0124, d); `CHECK(d == 32'd1, "ASG1 running")
    // scope
    wr(32'h10_0008, -32'sd500);
    `CHECK(scope_cfg.threshold == -14'sd500, "scope threshold")
    wr(32'h10_0000, 32'd1);
    `CHECK(n_arm == 1, "arm strobe once")
    rd(32'h11_0000 + 4 * 5, d); `CHECK(d == 32'd15, "scope ch1 point 5")
    rd(32'h12_0000 + 4 * 9, d); `CHECK(d == -32'sd9, "scope ch2 point 9")
    rd(32'h10_0020, d); `CHECK(d == 32'd77, "write pointer")
    rd(32'h10_002C, d); `CHECK(d == 32'h12, "trigger time high word")
    // errors
    @(negedge clk); sys_addr = 32'h40_0000; sys_ren = 1;
    @(negedge clk); sys_ren = 0;
    `CHECK(sys_ack && sys_err, "unmapped region gives err")
    @(negedge clk);
    `CHECK(!sys_ack && !sys_err, "ack lasts one clock")
    rd(32'h10_0040, d); `CHECK(sys_err, "unmapped scope register gives err")
    rd(32'h30_0008, d); `CHECK(!sys_err, "mapped register no err")
    `CHECK(n_ack == 31, "one ack per request")
    `TB_FINISH
  end
endmodule
