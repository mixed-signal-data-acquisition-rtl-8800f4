// sap_accum: per-window processing of one analog channel into a 128-bit packet.
//
// The sample FIFO holds {last, sample} words for the samples of each detection window.
// This block pops one word per clock whenever the FIFO is not empty and adds the
// signed 14-bit sample into a 48-bit accumulator (the width of one DSP48 slice), so a
// window of up to 2^32 samples cannot overflow it. On the word marked 'last' it forms
// a packet (daq_pkg::pkt_t) from the completed sum, the digital count of the same
// window and the current sequence position, pulses pkt_valid for one cycle and clears
// the accumulator. Boxcar summing is this design's reading of "processed in a
// specific pattern"; the packet layout is also this design's.
//
// The digital count is taken from di_count when di_count_valid is high in the cycle
// the last word is popped, otherwise from the value latched at the last di_count_valid
// (the counter finishes one cycle after the window, the earliest the last sample can
// leave the FIFO). CH2 packets (CHAN = 1) carry a zero count.
//
// Timing: win_done is high in the cycle the last sample is popped (the sequence
// position is sampled in that cycle); the packet appears one clock later.
module sap_accum
  import daq_pkg::*;
#(
  parameter bit          CHAN  = 1'b0,
  parameter int unsigned SUM_W = daq_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [ADC_W:0]          fifo_dout,   // {last, sample}
  input  logic                    fifo_empty,
  output logic                    fifo_pop,
  input  logic [CNT_W-1:0]        di_count,
  input  logic                    di_count_valid,
  input  logic [14:0]             point,
  input  logic [IDX_W-1:0]        s_idx,
  input  logic [IDX_W-1:0]        r_idx,
  output pkt_t                    pkt,
  output logic                    pkt_valid,
  output logic                    win_done     // last sample popped this cycle
);

  logic signed [SUM_W-1:0] acc, acc_next;
  logic [CNT_W-1:0]        cnt_hold, cnt_now;
  logic                    last;
  logic signed [ADC_W-1:0] smp;

  assign fifo_pop = !fifo_empty;
  assign win_done = fifo_pop && last;
  assign last     = fifo_dout[ADC_W];
  assign smp      = fifo_dout[ADC_W-1:0];
  assign acc_next = acc + SUM_W'(smp);
  assign cnt_now  = CHAN ? '0 : (di_count_valid ? di_count : cnt_hold);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt_hold  <= '0;
      pkt       <= '0;
      pkt_valid <= 1'b0;
    end else begin
      pkt_valid <= 1'b0;
      if (di_count_valid) cnt_hold <= di_count;
      if (fifo_pop) begin
        if (last) begin
          acc           <= '0;
          pkt.chan      <= CHAN;
          pkt.point     <= point;
          pkt.s_idx     <= s_idx;
          pkt.r_idx     <= r_idx;
          pkt.ai_sum    <= acc_next;
          pkt.di_count  <= cnt_now;
          pkt_valid     <= 1'b1;
        end else begin
          acc <= acc_next;
        end
      end
    end
  end

endmodule
