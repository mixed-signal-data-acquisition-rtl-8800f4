// adc_frontend: coding conversion and bias correction of the two ADC channels.
//
// The 14-bit ADC delivers straight binary, 0x0000 .. 0x3FFF. Following the published
// encoding, a raw word is mapped to two's complement so that 0x0000 reads +8191 and
// 0x3FFF reads -8192, i.e. value = 8191 - raw, which is {raw[13], ~raw[12:0]}.
// A host-written signed bias value is then subtracted and the result saturated to the
// 14-bit range; the host rewrites it to follow the temperature drift of the offset.
// The subtraction-with-saturation is this design's reading of "bias adjustment".
//
// Timing: raw words are registered on entry (stage 1); the corrected sample appears
// one clock later (stage 2), so latency is 2 cycles and throughput one sample per
// clock per channel. ai_valid rises 2 cycles after reset is released.
module adc_frontend #(
  parameter int unsigned ADC_W = daq_pkg::ADC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic        [ADC_W-1:0]  adc_a,
  input  logic        [ADC_W-1:0]  adc_b,
  input  logic signed [ADC_W-1:0]  bias_a,
  input  logic signed [ADC_W-1:0]  bias_b,
  output logic signed [ADC_W-1:0]  ai_a,
  output logic signed [ADC_W-1:0]  ai_b,
  output logic                     ai_valid
);

  localparam logic signed [ADC_W:0] MAXV = (ADC_W+1)'((1 << (ADC_W-1)) - 1);
  localparam logic signed [ADC_W:0] MINV = -(ADC_W+1)'(1 << (ADC_W-1));

  logic [ADC_W-1:0] raw_a_q, raw_b_q;
  logic [1:0]       vld_q;

  // Straight binary to the published two's-complement coding.
  function automatic logic signed [ADC_W-1:0] encode(input logic [ADC_W-1:0] raw);
    return {raw[ADC_W-1], ~raw[ADC_W-2:0]};
  endfunction

  // Bias subtraction with saturation to the ADC range.
  function automatic logic signed [ADC_W-1:0] correct(input logic signed [ADC_W-1:0] s,
                                                      input logic signed [ADC_W-1:0] b);
    logic signed [ADC_W:0] d;
    d = (ADC_W+1)'(s) - (ADC_W+1)'(b);
    if (d > MAXV)      return MAXV[ADC_W-1:0];
    else if (d < MINV) return MINV[ADC_W-1:0];
    else               return d[ADC_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      raw_a_q  <= '0;
      raw_b_q  <= '0;
      ai_a     <= '0;
      ai_b     <= '0;
      vld_q    <= '0;
    end else begin
      raw_a_q  <= adc_a;
      raw_b_q  <= adc_b;
      ai_a     <= correct(encode(raw_a_q), bias_a);
      ai_b     <= correct(encode(raw_b_q), bias_b);
      vld_q    <= {vld_q[0], 1'b1};
    end
  end

  assign ai_valid = vld_q[1];

endmodule
