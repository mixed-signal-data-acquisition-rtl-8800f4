// odmr_daq_top: programmable-logic part of a mixed-signal data-acquisition system for
// optically detected magnetic resonance.
//
// Blocks: adc_frontend (ADC coding and bias correction), sap (trigger windows, sample
// FIFOs, window accumulation, photon counting, sequence/continuous patterns, packet
// stream), msg (two DDS/PWM hybrid generator channels driving the DAC) and ctrl_regs
// (register file on the processor's GPIO command bus). Everything runs in one 125 MHz
// clock domain; one cycle is one 8 ns sample.
//
// Ports: the two ADC words, three digital inputs (CH1 trigger, CH2 trigger, photon
// pulses), the GPIO command bus from the processor, a 128-bit valid/ready packet
// stream towards the processor's DMA, the two DAC words (offset binary) and the two
// PWM pulse outputs, plus the two detection-window flags as digital outputs for
// monitoring (this design's addition). The processor, DMA, DDR3 memory and the ADC/DAC chips are outside.
// MSG channel 0's pulse is the internal trigger source of both analog channels.
module odmr_daq_top
  import daq_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADC_W-1:0]    adc_a,
  input  logic [ADC_W-1:0]    adc_b,
  input  logic [2:0]          di,
  input  logic [7:0]          gpio_addr,
  input  logic [31:0]         gpio_wdata,
  input  logic                gpio_we,
  output logic [31:0]         gpio_rdata,
  output logic [PKT_W-1:0]    m_axis_tdata,
  output logic                m_axis_tvalid,
  output logic                m_axis_tlast,
  input  logic                m_axis_tready,
  output logic [ADC_W-1:0]    dac_a,
  output logic [ADC_W-1:0]    dac_b,
  output logic [1:0]          do_pwm,
  output logic [1:0]          win_out
);

  logic                    run, continuous, start, rd_cmd, ai_valid, buf_busy, overflow;
  logic [1:0]              sw_trig, seq_done, win_active;
  logic [IDX_W-1:0]        n_pts, s_rep, r_rep;
  logic [12:0]             m_len;
  ai_cfg_t                 ai_cfg  [2];
  msg_cfg_t                msg_cfg [2];
  logic signed [ADC_W-1:0] ai      [2];
  logic [ADC_W-1:0]        dac     [2];

  ctrl_regs u_regs (
    .clk, .rst_n,
    .gpio_addr, .gpio_wdata, .gpio_we, .gpio_rdata,
    .run, .continuous, .start, .sw_trig, .rd_cmd,
    .n_pts, .s_rep, .r_rep, .m_len,
    .ai_cfg, .msg_cfg,
    .status ({win_active, overflow, buf_busy, seq_done})
  );

  adc_frontend u_adc (
    .clk, .rst_n,
    .adc_a, .adc_b,
    .bias_a   (ai_cfg[0].bias),
    .bias_b   (ai_cfg[1].bias),
    .ai_a     (ai[0]),
    .ai_b     (ai[1]),
    .ai_valid (ai_valid)
  );

  sap #(.CONT_DEPTH(4096)) u_sap (
    .clk, .rst_n,
    .ai, .ai_valid, .di,
    .pwm_trig (do_pwm[0]),
    .run, .continuous, .start, .sw_trig, .rd_cmd,
    .n_pts, .s_rep, .r_rep, .m_len,
    .ai_cfg,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready,
    .seq_done, .buf_busy, .overflow, .win_active
  );

  msg u_msg (
    .clk, .rst_n,
    .cfg     (msg_cfg),
    .dac     (dac),
    .pwm_out (do_pwm)
  );

  assign win_out = win_active;
  assign dac_a = dac[0];
  assign dac_b = dac[1];

endmodule
