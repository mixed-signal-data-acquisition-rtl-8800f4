// photon_counter: counts digital pulses (APD photon pulses) inside a detection window.
//
// The asynchronous input passes a two-flip-flop synchroniser; a third flip-flop gives
// rising-edge detection, so each pulse counts once whatever its width. Edges are
// counted while 'win' is high. In the last window cycle the total (including an edge
// in that cycle) is copied to 'count' and 'count_valid' pulses for one cycle in the
// next clock; the running counter is then cleared. The counter saturates at its
// maximum. The paper ties this input to one analog channel's window; which one, and
// the synchroniser, are this design's choices (CH1 at the top level).
//
// Timing: a pulse on 'di' is seen as an edge three clocks after it arrives; pulses
// must be at least one clock (8 ns) high and one clock low to be resolved.
module photon_counter #(
  parameter int unsigned CNT_W = daq_pkg::CNT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              di,
  input  logic              win,
  input  logic              win_last,
  output logic [CNT_W-1:0]  count,
  output logic              count_valid
);

  logic [2:0]       sync;
  logic             edge_det;
  logic [CNT_W-1:0] run_cnt, next_cnt;

  assign edge_det = sync[1] & ~sync[2];
  assign next_cnt = (edge_det && run_cnt != '1) ? run_cnt + 1'b1 : run_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync        <= '0;
      run_cnt     <= '0;
      count       <= '0;
      count_valid <= 1'b0;
    end else begin
      sync        <= {sync[1:0], di};
      count_valid <= 1'b0;
      if (win) begin
        if (win_last) begin
          count       <= next_cnt;
          count_valid <= 1'b1;
          run_cnt     <= '0;
        end else begin
          run_cnt <= next_cnt;
        end
      end else begin
        run_cnt <= '0;
      end
    end
  end

endmodule
