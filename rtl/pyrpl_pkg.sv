// pyrpl_pkg: types and constants shared by the DSP modules.
//
// Every signal routed between modules is a 14-bit two's-complement sample
// (sig_t), one per 125 MHz clock. The configuration of each module is
// gathered in a packed struct that the register decoder (dsp_regs) drives
// and the module reads; the field meanings are documented at each struct.
// The module slot numbers of the DSP multiplexer are fixed here. The
// 14-bit width, the 16 slots and the module counts follow the paper; the
// slot numbering and all register field widths are this design's choice.
// Linted on its own, the package shows N_MOD, Q_W and NA_W as unused
// parameters; the modules that import it use them.
package pyrpl_pkg;

  localparam int SIG_W  = 14;
  localparam int N_MOD  = 16;
  localparam int SEL_W  = 4;
  localparam int Q_W    = 24;   // internal width of the IQ quadratures
  localparam int NA_W   = 62;   // network analyser accumulator width
  localparam int SHIFT_W = 5;   // width of a first-order filter bandwidth shift

  typedef logic signed [SIG_W-1:0] sig_t;

  localparam sig_t SIG_MAX = sig_t'(2**(SIG_W-1) - 1);
  localparam sig_t SIG_MIN = sig_t'(-(2**(SIG_W-1)));

  // Slots of the DSP multiplexer.
  typedef enum logic [SEL_W-1:0] {
    SLOT_PID0 = 4'd0,  SLOT_PID1 = 4'd1,  SLOT_PID2 = 4'd2,
    SLOT_IQ0  = 4'd3,  SLOT_IQ1  = 4'd4,  SLOT_IQ2  = 4'd5,
    SLOT_IIR  = 4'd6,
    SLOT_ASG0 = 4'd7,  SLOT_ASG1 = 4'd8,
    SLOT_IN1  = 4'd9,  SLOT_IN2  = 4'd10,
    SLOT_OUT1 = 4'd11, SLOT_OUT2 = 4'd12,
    SLOT_SCOPE1 = 4'd13, SLOT_SCOPE2 = 4'd14,
    SLOT_NONE = 4'd15
  } slot_e;

  // output_select encoding (bit 0: analog output 1, bit 1: analog output 2)
  typedef enum logic [1:0] {OUT_NONE = 2'd0, OUT_1 = 2'd1, OUT_2 = 2'd2, OUT_BOTH = 2'd3} out_sel_e;

  // One first-order filter stage: enable, high-pass (1) or low-pass (0),
  // bandwidth fclk / (2 pi 2^shift).
  typedef struct packed {
    logic               en;
    logic               highpass;
    logic [SHIFT_W-1:0] shift;
  } filt_cfg_t;

  localparam int PID_GAIN_W = 24;
  localparam int PID_NFILT  = 4;

  typedef struct packed {
    sig_t                          setpoint;
    logic signed [PID_GAIN_W-1:0]  p;   // 1.0 = 2^12
    logic signed [PID_GAIN_W-1:0]  i;   // per-cycle integral gain, 1.0 = 2^32
    logic signed [PID_GAIN_W-1:0]  d;   // 1.0 = 2^10
    sig_t                          out_max;
    sig_t                          out_min;
    filt_cfg_t [PID_NFILT-1:0]     filt;
  } pid_cfg_t;

  typedef enum logic [1:0] {IQ_OUT_QUAD = 2'd0, IQ_OUT_DIRECT = 2'd1, IQ_OUT_CORDIC = 2'd2} iq_out_e;

  typedef struct packed {
    logic [31:0]         frequency;      // phase increment per clock
    logic [31:0]         phase;          // demodulation phase offset
    filt_cfg_t           ac;             // input high-pass (highpass bit ignored)
    filt_cfg_t [1:0]     lp;             // two low-pass stages (highpass bit ignored)
    logic signed [15:0]  gain;           // 1.0 = 2^12
    logic signed [15:0]  quadrature_factor; // 1.0 = 2^12
    sig_t                amplitude;      // excitation amplitude in output LSB
    iq_out_e             output_signal;
    logic [31:0]         sleep_cycles;
    logic [31:0]         na_cycles;
  } iq_cfg_t;

  typedef struct packed {
    logic               enable;     // 0: generator idle, output = offset
    logic [1:0]         trig_src;   // 0 immediate, 1 external rising edge, 2 software
    logic               noise;      // 1: output Lehmer noise instead of the table
    logic [29:0]        step;       // pointer increment, period = 2^30/step clocks
    logic [13:0]        last;       // last table index used (table length - 1)
    logic [15:0]        cycles;     // burst length in periods, 0 = continuous
    logic [31:0]        on_delay;   // clocks from trigger to start
    logic [31:0]        off_delay;  // clocks from start to stop, 0 = never
    logic signed [15:0] scale;      // 1.0 = 2^13
    sig_t               offset;
  } asg_cfg_t;

  typedef enum logic [2:0] {
    TRIG_IMMEDIATE = 3'd0, TRIG_CH1_RISE = 3'd1, TRIG_CH1_FALL = 3'd2,
    TRIG_CH2_RISE  = 3'd3, TRIG_CH2_FALL = 3'd4, TRIG_EXT      = 3'd5
  } trig_src_e;

  typedef struct packed {
    trig_src_e    trig_src;
    sig_t         threshold;
    sig_t         hysteresis;
    logic [4:0]   log_dec;       // decimation 2^log_dec, 0..16
    logic [13:0]  trig_delay;    // points written after the trigger
    logic         rolling;       // continuous acquisition, never stops
  } scope_cfg_t;

  function automatic sig_t sat_sig(input logic signed [63:0] v);
    if (v > 64'(signed'(SIG_MAX)))      return SIG_MAX;
    else if (v < 64'(signed'(SIG_MIN))) return SIG_MIN;
    else                                return sig_t'(v);
  endfunction

endpackage
