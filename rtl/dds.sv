// dds: direct digital synthesis of sine, square, triangle and sawtooth waveforms.
//
// A PHASE_W-bit phase accumulator adds the frequency tuning word every clock, so the
// output frequency is ftw * f_clk / 2^PHASE_W (0 .. f_clk/2 = 62.5 MHz at 125 MHz).
// The 48-bit default gives 0.44 uHz steps, so the 0.1 Hz modulation tone used in
// lock-in detection is hit to 1e-7 (a 32-bit accumulator would step 0.029 Hz and
// miss it by 13 %). A 32-bit phase offset (2^32 = one turn) is added to the top of the
// phase before the waveform is looked up. The sine comes from a quarter-wave table of 2^LUT_AW entries
// (1024 x 13 bit by default, 4096 points per period) filled at elaboration with
// round(8191 * sin(2*pi*(i+0.5)/4096)); the other quadrants follow from symmetry.
// Square, triangle and sawtooth are computed from the phase bits. The waveform is
// then multiplied by amp/8192 (amp is limited to 8192, unity gain) and rounded toward
// minus infinity. The paper gives the method, the band, the adjustable amplitude and
// phase and the four shapes; widths, table size and scaling are this design's.
//
// Timing: three register stages. With the accumulator cleared by reset, the sample
// present c clocks after reset release is the waveform at phase
// (c-3)*ftw + phase_off*2^(PHASE_W-32).
module dds
  import daq_pkg::*;
#(
  parameter int unsigned PHASE_W = 48,
  parameter int unsigned LUT_AW  = 10,
  parameter int unsigned DAC_W   = daq_pkg::ADC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [PHASE_W-1:0]       ftw,
  input  logic [31:0]              phase_off,   // top 32 bits of the phase
  input  logic [DAC_W-1:0]         amp,
  input  shape_e                   shape,
  output logic signed [DAC_W-1:0]  sample
);

  localparam int unsigned QN   = 1 << LUT_AW;
  localparam int unsigned MAG_W = DAC_W - 1;
  localparam int          FULL = (1 << (DAC_W-1)) - 1;   // 8191

  logic [MAG_W-1:0] lut [QN];

  initial begin
    for (int i = 0; i < QN; i++) begin
      lut[i] = MAG_W'($rtoi(real'(FULL) * $sin(2.0 * 3.14159265358979 * (real'(i) + 0.5) /
                                                (4.0 * real'(QN))) + 0.5));
    end
  end

  logic [PHASE_W-1:0]       acc, ph;
  logic signed [DAC_W-1:0]  wave;
  logic [DAC_W:0]           amp_c;
  logic [LUT_AW-1:0]        idx;
  logic [MAG_W-1:0]         mag;
  logic signed [DAC_W-1:0]  sine;
  logic [1:0]               quad;
  logic [DAC_W-1:0]         tri_t;
  logic signed [2*DAC_W+1:0] prod;

  assign quad  = ph[PHASE_W-1 -: 2];
  assign idx   = quad[0] ? ~ph[PHASE_W-3 -: LUT_AW] : ph[PHASE_W-3 -: LUT_AW];
  assign mag   = lut[idx];
  assign sine  = quad[1] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  assign tri_t = ph[PHASE_W-1] ? ~ph[PHASE_W-2 -: DAC_W] : ph[PHASE_W-2 -: DAC_W];
  assign amp_c = (amp > DAC_W'(1 << (DAC_W-1))) ? (DAC_W+1)'(1 << (DAC_W-1)) : (DAC_W+1)'(amp);
  assign prod  = wave * $signed({1'b0, amp_c});

  // Stage 1: accumulator and offset. Stage 2: waveform. Stage 3: amplitude.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc     <= '0;
      ph      <= '0;
      wave    <= '0;
      sample  <= '0;
    end else begin
      acc     <= acc + ftw;
      ph      <= acc + {phase_off, {(PHASE_W-32){1'b0}}};
      unique case (shape)
        SHAPE_SINE:     wave <= sine;
        SHAPE_SQUARE:   wave <= ph[PHASE_W-1] ? -DAC_W'(FULL) : DAC_W'(FULL);
        SHAPE_TRIANGLE: wave <= {~tri_t[DAC_W-1], tri_t[DAC_W-2:0]};
        default:        wave <= {~ph[PHASE_W-1], ph[PHASE_W-2 -: DAC_W-1]};
      endcase
      sample  <= DAC_W'(prod >>> (DAC_W-1));
    end
  end

endmodule
