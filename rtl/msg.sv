// msg: multiplex signal generator with two hybrid output channels.
//
// Each channel has a DDS waveform generator and a PWM pulse generator. A per-channel
// mode bit chooses which of the two drives the channel's DAC port: the DDS sample, or
// the PWM pulse as the levels +amp (high) and -amp (low). Both PWM pulse trains are
// also brought out as digital outputs; channel 0's pulse is the internal trigger of
// the acquisition side. "Hybrid channel" read as one DAC output carrying either kind
// of signal, and the pulse levels, are this design's choices.
//
// The DAC words are offset binary (two's complement with the sign bit inverted),
// the straight-binary input coding of a 14-bit dual DAC such as the AD9767; the
// paper does not state the coding.
//
// Timing: the DAC words are registered after the DDS (4 clocks from phase to pin in
// DDS mode; 2 clocks from the PWM counter in PWM mode).
module msg
  import daq_pkg::*;
#(
  parameter int unsigned DAC_W = daq_pkg::ADC_W,
  parameter int unsigned NCH   = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  msg_cfg_t              cfg     [NCH],
  output logic [DAC_W-1:0]      dac     [NCH],
  output logic [NCH-1:0]        pwm_out
);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic signed [DAC_W-1:0] dds_s, lvl, code;
    logic                    pwm;

    dds #(.DAC_W(DAC_W)) u_dds (
      .clk, .rst_n,
      .ftw       (cfg[c].ftw),
      .phase_off (cfg[c].phase_off),
      .amp       (cfg[c].amp),
      .shape     (cfg[c].shape),
      .sample    (dds_s)
    );

    pwm_gen #(.CNT_W(32)) u_pwm (
      .clk, .rst_n,
      .en     (cfg[c].pwm_en),
      .period (cfg[c].pwm_period),
      .high   (cfg[c].pwm_high),
      .pwm    (pwm)
    );

    // PWM level: amp limited to the positive full scale.
    assign lvl  = (cfg[c].amp > DAC_W'((1 << (DAC_W-1)) - 1)) ? DAC_W'((1 << (DAC_W-1)) - 1)
                                                             : cfg[c].amp;
    assign code = cfg[c].pwm_mode ? (pwm ? lvl : -lvl) : dds_s;

    always_ff @(posedge clk) begin
      if (!rst_n) dac[c] <= {1'b1, {(DAC_W-1){1'b0}}};   // mid-scale
      else        dac[c] <= {~code[DAC_W-1], code[DAC_W-2:0]};
    end

    assign pwm_out[c] = pwm;
  end

endmodule
