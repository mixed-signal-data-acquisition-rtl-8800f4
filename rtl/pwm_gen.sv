// pwm_gen: pulse-width-modulated digital pulse train with one-clock (8 ns) resolution.
//
// A counter runs 0 .. period-1; the output is high while the counter is below 'high',
// so each period starts with 'high' cycles high followed by period-high cycles low.
// 'high' >= 'period' gives a constant high, 'high' = 0 a constant low; period 0 acts
// as period 1. With en low the counter is held at 0 and the output is low. The
// counter-and-compare structure and the widths are this design's choices; 32 bits
// cover periods up to 34 s (the 20 ms, duty 0.8 trigger train is period 2 500 000,
// high 2 000 000).
//
// Timing: the output is registered; the first high cycle follows the first clock
// with en high.
module pwm_gen #(
  parameter int unsigned CNT_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [CNT_W-1:0]  period,
  input  logic [CNT_W-1:0]  high,
  output logic              pwm
);

  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      cnt <= '0;
      pwm <= 1'b0;
    end else begin
      pwm <= (cnt < high);
      if ({1'b0, cnt} + 1'b1 >= {1'b0, period}) cnt <= '0;
      else                                       cnt <= cnt + 1'b1;
    end
  end

endmodule
