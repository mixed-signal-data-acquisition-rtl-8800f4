// seq_ctrl: position bookkeeping of the sequence pattern.
//
// An experiment of N points is run point by point; each point is repeated R times
// before the next point starts, and the whole run of N points is repeated S times
// (R has priority over S, as published). Every 'step' (one window processed) advances
// r_idx; after R steps r_idx wraps and point advances; after N points point wraps and
// s_idx advances; after S sweeps 'done' is set and stays set until 'start'. In the
// continuous pattern the counters wrap at the end instead and 'done' never rises.
// A value of 0 for N, S or R counts as 1. 'start' clears everything.
//
// Timing: the outputs change the clock after 'step'; 'done' rises with the last step.
module seq_ctrl #(
  parameter int unsigned IDX_W = daq_pkg::IDX_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              continuous,
  input  logic [IDX_W-1:0]  n_pts,
  input  logic [IDX_W-1:0]  s_rep,
  input  logic [IDX_W-1:0]  r_rep,
  input  logic              step,
  output logic [IDX_W-1:0]  point,
  output logic [IDX_W-1:0]  s_idx,
  output logic [IDX_W-1:0]  r_idx,
  output logic              done,
  output logic              at_end       // the next step is the last of the run
);

  logic r_end, p_end, s_end;

  assign at_end = r_end && p_end && s_end;

  // Compared one bit wider so that a count of 2^IDX_W - 1 does not wrap.
  assign r_end = ({1'b0, r_idx} + 1'b1 >= {1'b0, r_rep});
  assign p_end = ({1'b0, point} + 1'b1 >= {1'b0, n_pts});
  assign s_end = ({1'b0, s_idx} + 1'b1 >= {1'b0, s_rep});

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      point <= '0;
      s_idx <= '0;
      r_idx <= '0;
      done  <= 1'b0;
    end else if (step && !done) begin
      if (!r_end) begin
        r_idx <= r_idx + 1'b1;
      end else begin
        r_idx <= '0;
        if (!p_end) begin
          point <= point + 1'b1;
        end else begin
          point <= '0;
          if (!s_end) begin
            s_idx <= s_idx + 1'b1;
          end else begin
            s_idx <= '0;
            done  <= !continuous;
          end
        end
      end
    end
  end

endmodule
