// trig_window: trigger selection and detection-window timing of one analog channel.
//
// A rising edge of the selected trigger (the channel's own digital input, the MSG
// pulse output, or a software strobe) starts a delay of D clock cycles, after which
// the detection window is held open for W cycles (8 ns each; 32-bit counters reach
// 2^35 ns, the published maximum of both). Triggers seen during the delay or the
// window are ignored, and no trigger is accepted while 'arm' is low; both rules are
// this design's choice.
//
// Timing: the external input passes a two-flip-flop synchroniser. If the edge is
// detected in cycle t (one cycle after the synchronised level rises), the window is
// high in cycles t+D+1 .. t+D+W. win_start marks its first cycle and win_last its
// last. W = 0 behaves as W = 1.
module trig_window #(
  parameter int unsigned CNT_W = daq_pkg::TIME_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arm,
  input  daq_pkg::trig_sel_e trig_sel,
  input  logic              ext_trig,   // asynchronous pin
  input  logic              int_trig,   // MSG pulse, already in this clock domain
  input  logic              sw_trig,    // one-cycle strobe
  input  logic [CNT_W-1:0]  delay_d,
  input  logic [CNT_W-1:0]  width_w,
  output logic              win,
  output logic              win_start,
  output logic              win_last,
  output logic              busy
);

  typedef enum logic [1:0] {IDLE, DELAY, WINDOW} state_e;

  state_e           state;
  logic [CNT_W-1:0] cnt;
  logic [1:0]       ext_sync;
  logic             trig_lvl, trig_q, trig_edge;
  logic [CNT_W-1:0] w_eff;

  assign w_eff = (width_w == '0) ? CNT_W'(1) : width_w;

  import daq_pkg::*;

  always_comb begin
    unique case (trig_sel)
      TRIG_EXT: trig_lvl = ext_sync[1];
      TRIG_PWM: trig_lvl = int_trig;
      TRIG_SW:  trig_lvl = sw_trig;
      default:  trig_lvl = 1'b0;
    endcase
  end

  assign trig_edge = trig_lvl & ~trig_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ext_sync <= '0;
      trig_q   <= 1'b0;
      state    <= IDLE;
      cnt      <= '0;
    end else begin
      ext_sync <= {ext_sync[0], ext_trig};
      trig_q   <= trig_lvl;
      unique case (state)
        IDLE: if (arm && trig_edge) begin
          if (delay_d == '0) begin
            state <= WINDOW;
            cnt   <= w_eff - 1'b1;
          end else begin
            state <= DELAY;
            cnt   <= delay_d - 1'b1;
          end
        end
        DELAY: if (cnt == '0) begin
          state <= WINDOW;
          cnt   <= w_eff - 1'b1;
        end else begin
          cnt <= cnt - 1'b1;
        end
        WINDOW: if (cnt == '0) begin
          state <= IDLE;
        end else begin
          cnt <= cnt - 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // win_start is registered so that it lines up with the first window cycle.
  logic start_q;
  always_ff @(posedge clk) begin
    if (!rst_n) start_q <= 1'b0;
    else        start_q <= (state == IDLE && arm && trig_edge && delay_d == '0) ||
                           (state == DELAY && cnt == '0);
  end

  assign win       = (state == WINDOW);
  assign win_start = start_q;
  assign win_last  = (state == WINDOW) && (cnt == '0);
  assign busy      = (state != IDLE);

endmodule
