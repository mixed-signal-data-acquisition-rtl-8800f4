// daq_pkg: types and constants shared by the mixed-signal ODMR data-acquisition logic.
//
// The acquisition side (SAP, "synchronized acquisition and processing") turns every
// detection window into one 128-bit packet; the packet layout below is this design's
// choice, the 128-bit width is the published one. The generator side (MSG,
// "multiplex signal generator") is configured per channel by msg_cfg_t. All
// settings reach the logic through the register map at the end of this file,
// which is written over a simple GPIO command bus (address, data, write strobe).
// One clock cycle is one 8 ns ADC sample at 125 MHz.
package daq_pkg;

  localparam int unsigned ADC_W  = 14;   // LTC2145-14 / AD9767 word width
  localparam int unsigned PKT_W  = 128;  // packet width
  localparam int unsigned ACC_W  = 48;   // window sum width (one DSP48 accumulator)
  localparam int unsigned TIME_W = 32;   // D and W counters: 2^32 x 8 ns = 2^35 ns
  localparam int unsigned IDX_W  = 16;   // N, S, R
  localparam int unsigned CNT_W  = 32;   // photon counter

  // Trigger source of one analog channel.
  typedef enum logic [1:0] {
    TRIG_EXT = 2'd0,   // its own digital input
    TRIG_PWM = 2'd1,   // MSG channel 0 pulse output
    TRIG_SW  = 2'd2    // software strobe from the register file
  } trig_sel_e;

  // DDS waveform shape.
  typedef enum logic [1:0] {
    SHAPE_SINE     = 2'd0,
    SHAPE_SQUARE   = 2'd1,
    SHAPE_TRIANGLE = 2'd2,
    SHAPE_SAWTOOTH = 2'd3
  } shape_e;

  // One SAP result packet, most significant field first.
  typedef struct packed {
    logic                     chan;     // 0 = CH1, 1 = CH2
    logic [14:0]              point;    // experimental point 0..N-1
    logic [IDX_W-1:0]         s_idx;    // sweep repeat 0..S-1
    logic [IDX_W-1:0]         r_idx;    // point repeat 0..R-1
    logic signed [ACC_W-1:0]  ai_sum;   // sum of the corrected samples in the window
    logic [CNT_W-1:0]         di_count; // digital pulses counted in the window (CH1 only)
  } pkt_t;

  // Per-channel acquisition settings.
  typedef struct packed {
    trig_sel_e          trig_sel;
    logic [TIME_W-1:0]  delay_d;   // D, clock cycles
    logic [TIME_W-1:0]  width_w;   // W, clock cycles
    logic [ADC_W-1:0]   bias;      // signed bias correction
  } ai_cfg_t;

  // Per-channel generator settings.
  typedef struct packed {
    logic               pwm_mode;  // 1: DAC carries the PWM pulse, 0: the DDS waveform
    logic               pwm_en;
    logic [31:0]        pwm_period;
    logic [31:0]        pwm_high;
    logic [47:0]        ftw;       // f = ftw * 125 MHz / 2^48
    logic [31:0]        phase_off; // 2^32 = one full turn
    logic [ADC_W-1:0]   amp;       // gain amp/8192, values above 8192 act as 8192
    shape_e             shape;
  } msg_cfg_t;

  // Register map (word addresses on the GPIO command bus).
  localparam logic [7:0] REG_CTRL      = 8'h00; // [0] run (arm triggers) [1] continuous pattern
  localparam logic [7:0] REG_CMD       = 8'h01; // write-1 strobes: [0] start/clear sequence [1] sw trig CH1 [2] sw trig CH2 [3] read command
  localparam logic [7:0] REG_N         = 8'h02;
  localparam logic [7:0] REG_S         = 8'h03;
  localparam logic [7:0] REG_R         = 8'h04;
  localparam logic [7:0] REG_M         = 8'h05;
  localparam logic [7:0] REG_STATUS    = 8'h06; // read: [1:0] seq done CH1/CH2 [2] buffer read-out busy [3] overflow [5:4] window open CH1/CH2
  localparam logic [7:0] REG_AI_BASE   = 8'h10; // +0 trig_sel, +1 D, +2 W, +3 bias; CH2 at +4
  localparam logic [7:0] REG_MSG_BASE  = 8'h20; // +0 {shape,pwm_en,pwm_mode}, +1 period, +2 high, +3 ftw[31:0], +4 phase, +5 amp, +6 ftw[47:32]; CH2 at +8

endpackage
