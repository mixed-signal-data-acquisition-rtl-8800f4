// sap: synchronized acquisition and processing of two analog channels and one
// digital (photon-count) channel.
//
// Per analog channel a trig_window opens a detection window D cycles after a trigger
// edge for W cycles; the corrected samples inside it go into a sample FIFO tagged
// with a last-sample flag; sap_accum sums them into a 128-bit packet together with
// the sequence position from seq_ctrl. CH1 packets also carry the photon count of the
// third digital input, counted by photon_counter over CH1's window. Each channel's
// packets wait in a small packet FIFO; a round-robin merge forms one packet stream.
//
// Two patterns (REG_CTRL bit 1):
//  - sequence pattern: N points x R repeats x S sweeps per channel; the packets go
//    straight to the DMA stream (m_axis_*, valid/ready), t_last marks the last packet
//    of a channel's run, and that channel stops accepting triggers until 'start'.
//  - continuous pattern: windows run without end and the packets are written
//    cyclically into cont_buffer (64 KB); a read command sends the newest M packets
//    to the DMA stream, t_last on the M-th.
// The paper gives the window, FIFO, counter, the N/S/R order and the two patterns;
// the packet FIFOs, the merge, the drop-on-full policy and t_last are this design's.
// A packet that meets a full packet FIFO is dropped and sets 'overflow' (sticky
// until reset).
//
// Timing: a window's packet enters its packet FIFO about 3 clocks after the window's
// last cycle; one packet per clock can leave on the stream.
// The packet's point field is 15 bits wide, so bit 15 of the sequence controller's
// point index is not carried (N up to 32767).
module sap
  import daq_pkg::*;
#(
  parameter int unsigned CONT_DEPTH = 4096,
  parameter int unsigned PKT_FIFO   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // corrected samples
  input  logic signed [ADC_W-1:0]  ai      [2],
  input  logic                     ai_valid,
  // digital inputs: [0] CH1 trigger, [1] CH2 trigger, [2] photon pulses
  input  logic [2:0]               di,
  input  logic                     pwm_trig,
  // settings and commands
  input  logic                     run,
  input  logic                     continuous,
  input  logic                     start,
  input  logic [1:0]               sw_trig,
  input  logic                     rd_cmd,
  input  logic [IDX_W-1:0]         n_pts,
  input  logic [IDX_W-1:0]         s_rep,
  input  logic [IDX_W-1:0]         r_rep,
  input  logic [$clog2(CONT_DEPTH):0] m_len,
  input  ai_cfg_t                  ai_cfg  [2],
  // packet stream to the DMA
  output logic [PKT_W-1:0]         m_axis_tdata,
  output logic                     m_axis_tvalid,
  output logic                     m_axis_tlast,
  input  logic                     m_axis_tready,
  // status
  output logic [1:0]               seq_done,
  output logic                     buf_busy,
  output logic                     overflow,
  output logic [1:0]               win_active
);

  logic [CNT_W-1:0] di_count;
  logic             di_count_valid;
  logic [1:0]       win, win_last;
  logic [1:0]       pf_empty, pf_ovf, pf_pop, sf_ovf;
  logic [PKT_W:0]   pf_dout [2];

  for (genvar c = 0; c < 2; c++) begin : g_ch
    logic              sf_empty, sf_pop, win_done, at_end;
    logic              pkt_valid, final_q;
    logic [ADC_W:0]    sf_dout;
    logic [IDX_W-1:0]  point, s_idx, r_idx;
    pkt_t              pkt;

    trig_window #(.CNT_W(TIME_W)) u_win (
      .clk, .rst_n,
      .arm       (run && !seq_done[c]),
      .trig_sel  (ai_cfg[c].trig_sel),
      .ext_trig  (di[c]),
      .int_trig  (pwm_trig),
      .sw_trig   (sw_trig[c]),
      .delay_d   (ai_cfg[c].delay_d),
      .width_w   (ai_cfg[c].width_w),
      .win       (win[c]),
      .win_start (),
      .win_last  (win_last[c]),
      .busy      ()
    );

    sample_fifo #(.W(ADC_W+1), .DEPTH(16)) u_sfifo (
      .clk, .rst_n,
      .push     (win[c] && ai_valid),
      .din      ({win_last[c], ai[c]}),
      .pop      (sf_pop),
      .dout     (sf_dout),
      .empty    (sf_empty),
      .full     (),
      .overflow (sf_ovf[c])
    );

    sap_accum #(.CHAN(c[0])) u_acc (
      .clk, .rst_n,
      .fifo_dout      (sf_dout),
      .fifo_empty     (sf_empty),
      .fifo_pop       (sf_pop),
      .di_count       (di_count),
      .di_count_valid (di_count_valid),
      .point          (point[14:0]),
      .s_idx, .r_idx,
      .pkt, .pkt_valid, .win_done
    );

    seq_ctrl #(.IDX_W(IDX_W)) u_seq (
      .clk, .rst_n,
      .start, .continuous, .n_pts, .s_rep, .r_rep,
      .step   (win_done),
      .point, .s_idx, .r_idx,
      .done   (seq_done[c]),
      .at_end (at_end)
    );

    always_ff @(posedge clk) begin
      if (!rst_n) final_q <= 1'b0;
      else        final_q <= win_done && at_end && !continuous;
    end

    sample_fifo #(.W(PKT_W+1), .DEPTH(PKT_FIFO)) u_pfifo (
      .clk, .rst_n,
      .push     (pkt_valid),
      .din      ({final_q, pkt}),
      .pop      (pf_pop[c]),
      .dout     (pf_dout[c]),
      .empty    (pf_empty[c]),
      .full     (),
      .overflow (pf_ovf[c])
    );

    assign win_active[c] = win[c];
  end

  photon_counter #(.CNT_W(CNT_W)) u_cnt (
    .clk, .rst_n,
    .di          (di[2]),
    .win         (win[0]),
    .win_last    (win_last[0]),
    .count       (di_count),
    .count_valid (di_count_valid)
  );

  // Round-robin merge of the two packet FIFOs.
  logic         rr, sel, mg_valid, mg_ready, mg_last;
  logic [PKT_W-1:0] mg_data;

  always_comb begin
    if (!pf_empty[0] && !pf_empty[1]) sel = rr;
    else                               sel = pf_empty[0];
  end
  assign mg_valid = !(pf_empty[0] && pf_empty[1]);
  assign mg_data  = pf_dout[sel][PKT_W-1:0];
  assign mg_last  = pf_dout[sel][PKT_W];
  assign pf_pop   = (mg_valid && mg_ready) ? (sel ? 2'b10 : 2'b01) : 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n)                     rr <= 1'b0;
    else if (mg_valid && mg_ready)  rr <= ~sel;
  end

  // Continuous pattern: every merged packet is written into the circular buffer.
  logic [PKT_W-1:0] cb_data;
  logic             cb_valid, cb_last, cb_ready;
  logic [31:0]      cb_dropped;

  cont_buffer #(.DEPTH(CONT_DEPTH), .PKT_W(PKT_W)) u_cbuf (
    .clk, .rst_n,
    .wr_valid  (continuous && mg_valid),
    .wr_data   (mg_data),
    .rd_cmd    (rd_cmd && continuous),
    .m_len     (m_len),
    .out_data  (cb_data),
    .out_valid (cb_valid),
    .out_last  (cb_last),
    .out_ready (cb_ready),
    .busy      (buf_busy),
    .dropped   (cb_dropped)
  );

  assign mg_ready = continuous ? 1'b1 : (m_axis_tready && !buf_busy);
  assign cb_ready = m_axis_tready;

  // The buffer's read-out also drains when the pattern is switched back mid-way.
  always_comb begin
    if (buf_busy) begin
      m_axis_tdata  = cb_data;
      m_axis_tvalid = cb_valid;
      m_axis_tlast  = cb_last;
    end else if (continuous) begin
      m_axis_tdata  = cb_data;
      m_axis_tvalid = 1'b0;
      m_axis_tlast  = 1'b0;
    end else begin
      m_axis_tdata  = mg_data;
      m_axis_tvalid = mg_valid;
      m_axis_tlast  = mg_last;
    end
  end

  // Sticky since reset: a FIFO overflowed or the buffer dropped packets.
  assign overflow = (|pf_ovf) || (|sf_ovf) || (cb_dropped != '0);

  // A stream word must stay put until it is taken.
  a_stream_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready && !continuous && !buf_busy |=> m_axis_tvalid);

endmodule
