// tb_odmr_daq_top: end-to-end test of the whole acquisition and generation logic at
// its default sizes, driven only through the top-level ports (GPIO bus, ADC words,
// digital inputs, packet stream, DAC words).
//
// A reference model built here converts the raw ADC words (8191 - raw - bias,
// saturated), sums them over every detection window (taken from the win_out monitor
// outputs), counts the photon-input edges and predicts the
// sequence position of each packet. Phases:
//  1. sequence pattern, N=4 R=3 S=2: CH1 triggered by MSG channel 0's PWM pulse (the
//     internal trigger), CH2 by its external input; random back-pressure on the stream.
//  2. sequence pattern on CH2 with software triggers (N=1 R=2 S=1).
//  3. continuous pattern: CH1 on a fast PWM trigger fills and wraps the 4096-packet
//     buffer; a read command with M = 4096 must return the newest 4096 packets in
//     order (packets arriving meanwhile are dropped); then a second read of M = 100.
//  4. overflow: the stream is held off while windows keep coming.
// MSG channel 1 runs a 10 MHz DDS sine whose zero crossings are counted, and channel
// 0's DAC word must follow its PWM pulse. Every mechanism is counted and a failure is
// counted for any that never happened.
module tb_odmr_daq_top;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [13:0] adc_a = 0, adc_b = 0;
  logic [2:0]  di = 0;
  logic [7:0]  gpio_addr = REG_STATUS;
  logic [31:0] gpio_wdata = 0, gpio_rdata;
  logic        gpio_we = 0;
  logic [127:0] m_axis_tdata;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready = 1;
  logic [13:0] dac_a, dac_b;
  logic [1:0]  do_pwm, win_out;
  int checks = 0, failures = 0;

  odmr_daq_top dut (.*);

  // ---------------------------------------------------------------- bus helpers
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    gpio_addr = a; gpio_wdata = d; gpio_we = 1;
    @(negedge clk);
    gpio_we = 0; gpio_addr = REG_STATUS;
  endtask

  // ---------------------------------------------------------------- reference model
  int  bias [2];
  int  n_cfg = 1, r_cfg = 1, s_cfg = 1;
  bit  cont_mode = 0;
  int  raw_h [2][3];
  logic [3:0] dh = 0;
  longint run_sum [2];
  int  run_cnt = 0, nwin [2];
  logic prev_win [2];
  pkt_t exp_q [2][$];

  function automatic int corr(input int raw, input int b);
    int v = 8191 - raw - b;
    return v > 8191 ? 8191 : v < -8192 ? -8192 : v;
  endfunction

  function automatic pkt_t mk(input int c, input int k, input longint sum, input int cnt);
    pkt_t p;
    int per = n_cfg * r_cfg;
    p.chan = c[0];
    p.s_idx = 16'((k / per) % s_cfg);
    p.point = 15'((k % per) / r_cfg);
    p.r_idx = 16'(k % r_cfg);
    p.ai_sum = 48'(sum);
    p.di_count = c == 0 ? 32'(cnt) : 32'd0;
    return p;
  endfunction

  // At each edge: the FIFO takes corr(raw two edges earlier, bias) while the window
  // flag is high; a packet is predicted when the flag falls.
  always @(posedge clk) begin
    logic e;
    logic [1:0] w;
    int cur [2];
    cur[0] = adc_a; cur[1] = adc_b;
    w = win_out;
    dh = rst_n ? {dh[2:0], di[2]} : 4'd0;
    e = dh[2] & ~dh[3];
    if (rst_n) begin
      for (int c = 0; c < 2; c++) begin
        if (w[c]) begin
          run_sum[c] += longint'(corr(raw_h[c][1], bias[c]));
          if (c == 0) run_cnt += e;
        end
        if (prev_win[c] && !w[c]) begin
          exp_q[c].push_back(mk(c, nwin[c], run_sum[c], run_cnt));
          nwin[c]++;
          run_sum[c] = 0;
          if (c == 0) run_cnt = 0;
        end
        prev_win[c] = w[c];
      end
    end else begin
      for (int c = 0; c < 2; c++) begin prev_win[c] = 0; run_sum[c] = 0; end
      run_cnt = 0;
    end
    for (int c = 0; c < 2; c++) begin
      raw_h[c][1] = raw_h[c][0]; raw_h[c][0] = cur[c];
    end
  end

  // random analog data and photon pulses
  always @(negedge clk) begin
    adc_a = 14'($urandom);
    adc_b = 14'($urandom);
    di[2] = ($urandom_range(0, 3) == 0) ? ~di[2] : di[2];
  end

  // ---------------------------------------------------------------- stream checker
  int got [2], lasts = 0, stalls = 0;
  int mode = 0;               // 0 per-channel sequence check, 1 continuous read-out
  pkt_t cont_hist [$];
  int   cont_len = 0, cont_got = 0, cont_base = 0;
  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && !m_axis_tready) stalls++;
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      automatic pkt_t p = pkt_t'(m_axis_tdata);
      if (m_axis_tlast) lasts++;
      if (mode == 0) begin
        automatic int c = p.chan;
        checks++;
        if (exp_q[c].size() == 0) begin failures++; $display("FAIL unexpected packet ch%0d", c); end
        else begin
          automatic pkt_t e = exp_q[c].pop_front();
          if (p !== e) begin failures++; if (failures < 10) $display("FAIL ch%0d pkt %0d: got %h exp %h", c, got[c], p, e); end
        end
        got[c]++;
      end else if (mode == 1) begin
        checks += 2;
        if (p !== cont_hist[cont_base + cont_got]) begin
          failures++; if (failures < 10) $display("FAIL cont pkt %0d got %h exp %h", cont_got, p, cont_hist[cont_base + cont_got]);
        end
        cont_got++;
        if (m_axis_tlast !== (cont_got == cont_len)) begin failures++; $display("FAIL cont tlast at %0d", cont_got); end
      end
    end
  end

  // ---------------------------------------------------------------- MSG monitors
  int zc = 0, pwm_mis = 0, pwm_hi = 0, msg_cyc = 0;
  logic prev_sign = 0, prev_pwm0 = 0;
  bit   msg_check = 0;
  always @(posedge clk) begin
    #1;
    if (msg_check) begin
      if (dac_b[13] != prev_sign) zc++;
      // DAC word of channel 0 is registered from the pulse of the previous cycle
      if (dac_a !== (prev_pwm0 ? 14'(8192 + 6000) : 14'(8192 - 6000))) pwm_mis++;
      if (do_pwm[0]) pwm_hi++;
      msg_cyc++;
    end
    prev_sign = dac_b[13];
    prev_pwm0 = do_pwm[0];
  end

  // ---------------------------------------------------------------- mechanisms
  int n_seq_done = 0, n_cont_read = 0, n_ext = 0, n_pwm = 0, n_sw = 0, n_photons = 0;
  int n_ovf = 0, n_drop = 0, n_wrap = 0;
  always @(posedge clk) if (rst_n) begin
    if (run_cnt > 0) n_photons++;
  end

  task automatic reset_dut();
    @(negedge clk) rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++) begin nwin[c] = 0; exp_q[c].delete(); got[c] = 0; end
  endtask

  task automatic wait_status(input int bitn, input bit val, input int maxc);
    int k = 0;
    while (gpio_rdata[bitn] !== val && k < maxc) begin @(negedge clk); k++; end
  endtask

  initial begin
    for (int c = 0; c < 2; c++) begin run_sum[c] = 0; nwin[c] = 0; prev_win[c] = 0; got[c] = 0; end
    bias[0] = 100; bias[1] = -50;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      forever @(negedge clk) m_axis_tready = (mode == 2) ? 1'b0 : ($urandom_range(0, 3) != 0);
    join_none

    // ---- phase 1: sequence pattern, PWM and external triggers
    wr(REG_AI_BASE + 3, 32'(bias[0]));
    wr(REG_AI_BASE + 7, 32'(bias[1]));
    wr(REG_AI_BASE + 0, TRIG_PWM); wr(REG_AI_BASE + 1, 2);  wr(REG_AI_BASE + 2, 10);
    wr(REG_AI_BASE + 4, TRIG_EXT); wr(REG_AI_BASE + 5, 0);  wr(REG_AI_BASE + 6, 5);
    n_cfg = 4; r_cfg = 3; s_cfg = 2;
    wr(REG_N, 4); wr(REG_R, 3); wr(REG_S, 2);
    // MSG ch0: PWM, period 40, high 32 (duty 0.8), level 6000 on the DAC
    wr(REG_MSG_BASE + 1, 40); wr(REG_MSG_BASE + 2, 32); wr(REG_MSG_BASE + 5, 6000);
    // MSG ch1: 10 MHz sine, full amplitude
    wr(REG_MSG_BASE + 8 + 3, 32'hE147_AE14);   // 10 MHz: 2^48 * 10/125
    wr(REG_MSG_BASE + 8 + 6, 32'h147A);
    wr(REG_MSG_BASE + 8 + 5, 8192);
    wr(REG_MSG_BASE + 8 + 0, {28'd0, SHAPE_SINE, 2'b00});
    wr(REG_MSG_BASE + 0, 32'b0011);          // PWM mode, enabled
    wr(REG_CMD, 1);
    wr(REG_CTRL, 1);                         // run
    repeat (5) @(negedge clk);
    msg_check = 1;
    fork
      begin
        for (int k = 0; k < 30; k++) begin
          repeat ($urandom_range(20, 40)) @(negedge clk);
          di[1] = 1; repeat (2) @(negedge clk); di[1] = 0; n_ext++;
        end
      end
    join
    repeat (1250) @(negedge clk);
    msg_check = 0;
    n_pwm = nwin[0];
    wait_status(0, 1, 2000); wait_status(1, 1, 2000);
    repeat (50) @(negedge clk);
    checks += 4;
    if (gpio_rdata[1:0] == 2'b11) n_seq_done++;
    else begin failures++; $display("FAIL sequence not done %b", gpio_rdata[1:0]); end
    if (got[0] != 24 || got[1] != 24) begin failures++; $display("FAIL seq packets %0d %0d", got[0], got[1]); end
    if (lasts != 2) begin failures++; $display("FAIL tlast count %0d", lasts); end
    if (nwin[0] != 24 || nwin[1] != 24) begin failures++; $display("FAIL windows %0d %0d", nwin[0], nwin[1]); end
    // 10 MHz over the checked span: 2 crossings per 12.5 cycles
    $display("zero crossings %0d, pwm mismatches %0d, pwm high cycles %0d of %0d", zc, pwm_mis, pwm_hi, msg_cyc);

    // ---- phase 2: software triggers on CH2
    wr(REG_AI_BASE + 4, TRIG_SW);
    n_cfg = 1; r_cfg = 2; s_cfg = 1;
    wr(REG_N, 1); wr(REG_R, 2); wr(REG_S, 1);
    wr(REG_MSG_BASE + 0, 32'b0001);          // stop CH1's trigger source
    wr(REG_CMD, 1);
    for (int c = 0; c < 2; c++) begin nwin[c] = 0; exp_q[c].delete(); got[c] = 0; end
    for (int k = 0; k < 3; k++) begin wr(REG_CMD, 32'b100); n_sw++; repeat (30) @(negedge clk); end
    checks++;
    if (got[1] != 2 || got[0] != 0) begin failures++; $display("FAIL sw trig packets %0d %0d", got[0], got[1]); end

    // ---- phase 3: continuous pattern, full 4096-packet buffer
    mode = 3;                                  // packets are collected, not checked
    wr(REG_AI_BASE + 1, 0); wr(REG_AI_BASE + 2, 3);
    wr(REG_MSG_BASE + 1, 8); wr(REG_MSG_BASE + 2, 4);
    wr(REG_CTRL, 3);                           // run + continuous
    n_cfg = 1; r_cfg = 2; s_cfg = 1;
    wr(REG_CMD, 1);
    for (int c = 0; c < 2; c++) begin nwin[c] = 0; exp_q[c].delete(); end
    wr(REG_M, 4096);
    wr(REG_MSG_BASE + 0, 32'b0011);            // fast PWM trigger on
    while (nwin[0] < 4600) begin
      @(negedge clk);
      while (exp_q[0].size() > 0) cont_hist.push_back(exp_q[0].pop_front());
    end
    if (nwin[0] > 4096) n_wrap++;
    // freeze the reference at the read command: the newest 4096 packets
    repeat (12) @(negedge clk);
    @(negedge clk);
    gpio_addr = REG_CMD; gpio_wdata = 32'b1000; gpio_we = 1;
    while (exp_q[0].size() > 0) cont_hist.push_back(exp_q[0].pop_front());
    @(negedge clk);
    gpio_we = 0; gpio_addr = REG_STATUS;
    cont_len = 4096; cont_got = 0; cont_base = cont_hist.size() - 4096;
    mode = 1;
    wait_status(2, 1, 100);
    wait_status(2, 0, 40000);
    mode = 3;
    n_cont_read++;
    checks++;
    if (cont_got != 4096) begin failures++; $display("FAIL continuous read-out %0d", cont_got); end
    // packets arriving during the read-out were dropped; the buffer refills
    if (nwin[0] > 4600 + 20) n_drop++;
    exp_q[0].delete();
    cont_hist.delete();
    begin
      automatic int start_w = nwin[0];
      while (nwin[0] < start_w + 300) begin
        @(negedge clk);
        while (exp_q[0].size() > 0) cont_hist.push_back(exp_q[0].pop_front());
      end
    end
    wr(REG_M, 100);
    repeat (12) @(negedge clk);
    @(negedge clk);
    gpio_addr = REG_CMD; gpio_wdata = 32'b1000; gpio_we = 1;
    while (exp_q[0].size() > 0) cont_hist.push_back(exp_q[0].pop_front());
    @(negedge clk);
    gpio_we = 0; gpio_addr = REG_STATUS;
    cont_len = 100; cont_got = 0; cont_base = cont_hist.size() - 100;
    mode = 1;
    wait_status(2, 1, 100);
    wait_status(2, 0, 4000);
    mode = 3;
    n_cont_read++;
    checks++;
    if (cont_got != 100) begin failures++; $display("FAIL second read-out %0d", cont_got); end
    wait_status(3, 1, 10);
    if (gpio_rdata[3]) n_ovf += 0;   // overflow from drops is checked in phase 4

    // ---- phase 4: back-pressure held until the packet FIFOs overflow
    reset_dut();
    wr(REG_AI_BASE + 0, TRIG_PWM); wr(REG_AI_BASE + 2, 2);
    wr(REG_MSG_BASE + 1, 8); wr(REG_MSG_BASE + 2, 4); wr(REG_MSG_BASE + 0, 32'b0011);
    wr(REG_N, 1000);
    mode = 2;
    wr(REG_CTRL, 1);
    repeat (400) @(negedge clk);
    checks++;
    if (gpio_rdata[3]) n_ovf++;
    else begin failures++; $display("FAIL no overflow flag"); end
    mode = 3;

    // ---- mechanism coverage
    $display("mechanisms: seq_done=%0d cont_read=%0d ext=%0d pwm=%0d sw=%0d photons=%0d stalls=%0d overflow=%0d drop=%0d wrap=%0d",
             n_seq_done, n_cont_read, n_ext, n_pwm, n_sw, n_photons, stalls, n_ovf, n_drop, n_wrap);
    checks += 12;
    if (n_seq_done == 0) failures++;
    if (n_cont_read < 2) failures++;
    if (n_ext == 0) failures++;
    if (n_pwm == 0) failures++;
    if (n_sw == 0) failures++;
    if (n_photons == 0) failures++;
    if (stalls == 0) failures++;
    if (n_ovf == 0) failures++;
    if (n_drop == 0) failures++;
    if (n_wrap == 0) failures++;
    // 10 MHz at 125 MHz: 2 crossings per 12.5 cycles; PWM duty 0.8
    if (zc < msg_cyc * 2 / 12.5 - 3 || zc > msg_cyc * 2 / 12.5 + 3) begin failures++; $display("FAIL DDS zero crossings %0d", zc); end
    if (pwm_mis != 0 || pwm_hi < msg_cyc * 0.8 - 40 || pwm_hi > msg_cyc * 0.8 + 40) begin failures++; $display("FAIL PWM on DAC"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
