// tb_sap: the acquisition and processing path with a 16-entry continuous buffer.
// The analog inputs carry random samples and the photon input random pulses. A
// reference, built here from the window flags, sums the samples of each window and
// counts the pulse edges (after the 2-flip-flop synchroniser), and predicts the
// sequence position of every packet.
//  1. sequence pattern, N=3 R=2 S=2: CH1 on software triggers, CH2 on its external
//     input, random D/W, random back-pressure on the stream. Every packet's fields,
//     the N*R*S count per channel, t_last and 'done' are checked; later triggers must
//     be ignored.
//  2. continuous pattern: 30 CH1 windows, then a read command for M = 10 must return
//     the newest 10 packets in order with t_last on the 10th.
module tb_sap;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic signed [13:0] ai [2];
  logic ai_valid = 1;
  logic [2:0] di = 0;
  logic pwm_trig = 0, run = 0, continuous = 0, start = 0, rd_cmd = 0;
  logic [1:0] sw_trig = 0;
  logic [15:0] n_pts = 3, s_rep = 2, r_rep = 2;
  logic [4:0] m_len = 10;
  ai_cfg_t ai_cfg [2];
  logic [127:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 1;
  logic [1:0] seq_done, win_active;
  logic buf_busy, overflow;
  int checks = 0, failures = 0;

  sap #(.CONT_DEPTH(16)) dut (.*);

  // reference sums and counts per window
  longint run_sum [2];
  int     run_cnt = 0;
  logic [3:0] dh = 0;
  pkt_t   exp_q [2][$];
  int     nwin [2];
  logic   prev_win [2];

  function automatic pkt_t mk(input int c, input int k, input longint sum, input int cnt);
    pkt_t p;
    int per = int'(n_pts) * int'(r_rep);
    p.chan = c[0];
    p.s_idx = 16'((k / per) % s_rep);
    p.point = 15'((k % per) / r_rep);
    p.r_idx = 16'(k % r_rep);
    p.ai_sum = 48'(sum);
    p.di_count = c == 0 ? 32'(cnt) : 32'd0;
    return p;
  endfunction

  always @(posedge clk) begin
    logic e;
    dh = rst_n ? {dh[2:0], di[2]} : 4'd0;
    e = dh[2] & ~dh[3];
    if (rst_n) begin
      for (int c = 0; c < 2; c++) begin
        if (win_active[c]) run_sum[c] += longint'(ai[c]);
        if (c == 0 && win_active[0]) run_cnt += e;
        if (prev_win[c] && !win_active[c]) begin
          // the previous cycle was the last of the window: but its sample was added
        end
      end
    end
  end
  // window end detection one cycle later (win falls)
  always @(posedge clk) begin
    #2;
    for (int c = 0; c < 2; c++) begin
      if (prev_win[c] && !win_active[c]) begin
        exp_q[c].push_back(mk(c, nwin[c], run_sum[c], run_cnt));
        nwin[c]++;
        run_sum[c] = 0;
        if (c == 0) run_cnt = 0;
      end
      prev_win[c] = win_active[c];
    end
  end

  // random stimulus on the data inputs
  always @(negedge clk) begin
    ai[0] = 14'($urandom);
    ai[1] = 14'($urandom);
    di[2] = ($urandom_range(0, 3) == 0) ? ~di[2] : di[2];
  end

  // stream checker
  int got [2], lasts [2];
  pkt_t cont_hist [$];
  bit   cont_phase = 0;
  int   cont_got = 0;
  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      automatic pkt_t p = pkt_t'(m_axis_tdata);
      if (!cont_phase) begin
        automatic int c = p.chan;
        checks += 2;
        if (exp_q[c].size() == 0) begin failures++; $display("FAIL unexpected packet ch%0d", c); end
        else begin
          automatic pkt_t e = exp_q[c].pop_front();
          if (p !== e) begin failures++; $display("FAIL ch%0d pkt %0d: got %h exp %h", c, got[c], p, e); end
        end
        got[c]++;
        if (m_axis_tlast !== (got[c] == 12)) begin failures++; $display("FAIL tlast ch%0d #%0d", c, got[c]); end
      end else begin
        checks += 2;
        if (p !== cont_hist[cont_hist.size() - 10 + cont_got]) begin failures++; $display("FAIL cont pkt %0d got %h exp %h", cont_got, p, cont_hist[cont_hist.size() - 10 + cont_got]); end
        cont_got++;
        if (m_axis_tlast !== (cont_got == 10)) begin failures++; $display("FAIL cont tlast %0d", cont_got); end
      end
    end
  end

  task automatic trig(input int c);
    @(negedge clk);
    if (c == 0) sw_trig[0] = 1; else di[1] = 1;
    @(negedge clk);
    sw_trig = 0; di[1] = 0;
  endtask

  initial begin
    for (int c = 0; c < 2; c++) begin
      ai_cfg[c] = '0; run_sum[c] = 0; nwin[c] = 0; prev_win[c] = 0; got[c] = 0;
    end
    ai_cfg[0].trig_sel = TRIG_SW;  ai_cfg[0].delay_d = 2; ai_cfg[0].width_w = 7;
    ai_cfg[1].trig_sel = TRIG_EXT; ai_cfg[1].delay_d = 0; ai_cfg[1].width_w = 3;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1; run = 1;
    fork
      forever @(negedge clk) m_axis_tready = ($urandom_range(0, 3) != 0);
    join_none
    // 1. sequence pattern: 12 windows per channel plus 3 extra triggers each
    for (int k = 0; k < 15; k++) begin
      ai_cfg[0].delay_d = $urandom_range(0, 5); ai_cfg[0].width_w = $urandom_range(1, 20);
      ai_cfg[1].delay_d = $urandom_range(0, 5); ai_cfg[1].width_w = $urandom_range(1, 20);
      fork trig(0); trig(1); join
      repeat (40) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks += 5;
    if (got[0] != 12 || got[1] != 12) begin failures++; $display("FAIL counts %0d %0d", got[0], got[1]); end
    if (seq_done !== 2'b11) begin failures++; $display("FAIL done %b", seq_done); end
    if (nwin[0] != 12 || nwin[1] != 12) begin failures++; $display("FAIL extra windows %0d %0d", nwin[0], nwin[1]); end
    if (overflow) begin failures++; $display("FAIL overflow"); end
    if (buf_busy) failures++;

    // 2. continuous pattern on CH1
    continuous = 1; start = 1; @(negedge clk); start = 0;
    nwin[0] = 0; exp_q[0].delete();
    for (int k = 0; k < 30; k++) begin
      ai_cfg[0].width_w = $urandom_range(1, 6);
      trig(0);
      repeat (12) @(negedge clk);
      while (exp_q[0].size() > 0) cont_hist.push_back(exp_q[0].pop_front());
    end
    cont_phase = 1;
    rd_cmd = 1; @(negedge clk); rd_cmd = 0;
    repeat (60) @(negedge clk);
    checks += 2;
    if (cont_got != 10) begin failures++; $display("FAIL cont got %0d", cont_got); end
    if (buf_busy) begin failures++; $display("FAIL busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
