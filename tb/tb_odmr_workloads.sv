// tb_odmr_workloads: the two published NV-centre experiments run on the whole design
// at its default sizes, driven only through the top-level ports.
//
//  A. cw-ODMR of an ensemble, at the published timing: MSG channel 0 gives pulses of
//     20 ms period and duty 0.8 (2,500,000 / 2,000,000 cycles), each pulse triggers
//     a 16 ms detection window (W = 2,000,000) on CH1 and steps the microwave
//     frequency. A photodiode model on CH1 gives a fluorescence dip at the resonant
//     point. Only N = 3 points are run (the published 1000 points take 20 s of
//     hardware time). Checked: pulse period and high time, window length and its
//     fixed offset from the pulse, every packet field against a model (the window
//     sums exceed 2^32, so the wide accumulator is exercised), the dip, t_last and
//     the sequence-done status.
//  B. Lock-in detection, scaled in time: MSG channel 1 gives a sine of amplitude
//     7045/8192 (1.72 Vpp of a 2 Vpp full scale) that frequency-modulates the
//     microwave. The sine is looped back into CH2, and the photon rate on the
//     counting input follows it. Both channels are windowed by the same pulses
//     (period 1000, W = 800) in the continuous pattern, and the newest 4096 packets
//     are read out. The modulation period is 40960 cycles instead of the published
//     0.1 Hz (1.25e9 cycles), which only the tuning word changes. Checked: every packet
//     against a model, each channel's windows in order, and that the photon counts
//     follow the acquired modulation in phase (correlation at zero lag high and
//     above that at a quarter period).
module tb_odmr_workloads;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [13:0] adc_a = 14'd8191, adc_b = 14'd8191;
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

  localparam int PERIOD_A = 2_500_000, HIGH_A = 2_000_000, W_A = 2_000_000, N_A = 3;
  localparam int PERIOD_B = 1000, W_B = 800, N_B = 30000, AMP_B = 7045;
  localparam longint FTW_B = 64'd6871947674;     // 2^48 / 40960

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    gpio_addr = a; gpio_wdata = d; gpio_we = 1;
    @(negedge clk);
    gpio_we = 0; gpio_addr = REG_STATUS;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- stimulus models
  int part = 0;             // 1 cw-ODMR, 2 lock-in
  int mw_point = -1;        // microwave frequency index, stepped by each pulse
  logic prev_pwm_s = 0;
  always @(negedge clk) begin
    automatic int s = int'(dac_b) - 8192;          // DAC word back to two's complement
    if (do_pwm[0] && !prev_pwm_s) mw_point++;
    prev_pwm_s = do_pwm[0];
    if (part == 1) begin
      // photodiode: 6000 off resonance, 5400 at point 1, +-255 noise
      automatic int v = (mw_point == 1 ? 5400 : 6000) + int'($urandom_range(0, 510)) - 255;
      adc_a = 14'(8191 - v);
      di[2] = di[2] ? 1'b0 : ($urandom_range(0, 99) < 3);
    end else if (part == 2) begin
      // analog loop-back of MSG channel 1 into CH2; photon rate follows the modulation
      automatic real p = 0.05 * (1.0 + 0.6 * real'(s) / 8192.0);
      adc_b = 14'(8191 - s);
      adc_a = 14'($urandom_range(8000, 8191));
      di[2] = di[2] ? 1'b0 : (real'($urandom_range(0, 99999)) < p * 100000.0);
    end
  end

  // ---------------------------------------------------------------- reference model
  int  raw_h [2][2];
  logic [3:0] dh = 0;
  longint run_sum [2];
  int  run_cnt = 0, nwin [2];
  logic prev_win [2];
  pkt_t exp_pkt [2][$];
  int  n_cfg = 1;

  function automatic int corr(input int raw);
    int v = 8191 - raw;
    return v > 8191 ? 8191 : v < -8192 ? -8192 : v;
  endfunction

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
          run_sum[c] += longint'(corr(raw_h[c][1]));
          if (c == 0) run_cnt += e;
        end
        if (prev_win[c] && !w[c]) begin
          automatic pkt_t p;
          p.chan = c[0];
          p.point = 15'(nwin[c] % n_cfg);
          p.s_idx = 0;
          p.r_idx = 0;
          p.ai_sum = 48'(run_sum[c]);
          p.di_count = c == 0 ? 32'(run_cnt) : 32'd0;
          exp_pkt[c].push_back(p);
          nwin[c]++;
          run_sum[c] = 0;
          if (c == 0) run_cnt = 0;
        end
        prev_win[c] = w[c];
      end
    end else begin
      for (int c = 0; c < 2; c++) begin prev_win[c] = 0; run_sum[c] = 0; nwin[c] = 0; end
      run_cnt = 0;
    end
    for (int c = 0; c < 2; c++) begin
      raw_h[c][1] = raw_h[c][0]; raw_h[c][0] = cur[c];
    end
  end

  // ---------------------------------------------------------------- timing monitors
  longint cyc = 0, pwm_rise = -1, pwm_fall = -1, win_rise = -1;
  int pwm_periods [$], pwm_highs [$], win_lens [$], win_offs [$];
  logic prev_pwm = 0, prev_w0 = 0;
  always @(posedge clk) begin
    #1;
    cyc++;
    if (rst_n) begin
      if (do_pwm[0] && !prev_pwm) begin
        if (pwm_rise >= 0) pwm_periods.push_back(int'(cyc - pwm_rise));
        pwm_rise = cyc;
      end
      if (!do_pwm[0] && prev_pwm) pwm_highs.push_back(int'(cyc - pwm_rise));
      if (win_out[0] && !prev_w0) begin win_rise = cyc; win_offs.push_back(int'(cyc - pwm_rise)); end
      if (!win_out[0] && prev_w0) win_lens.push_back(int'(cyc - win_rise));
    end
    prev_pwm = do_pwm[0];
    prev_w0 = win_out[0];
  end

  // ---------------------------------------------------------------- stream capture
  pkt_t got [$];
  bit   got_last [$];
  always @(posedge clk)
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      got.push_back(pkt_t'(m_axis_tdata));
      got_last.push_back(m_axis_tlast);
    end

  task automatic reset_dut();
    rst_n = 0;
    repeat (5) @(negedge clk);
    got.delete(); got_last.delete();
    for (int c = 0; c < 2; c++) exp_pkt[c].delete();
    pwm_periods.delete(); pwm_highs.delete(); win_lens.delete(); win_offs.delete();
    pwm_rise = -1; mw_point = -1;
    rst_n = 1;
    repeat (2) @(negedge clk);
  endtask

  // ---------------------------------------------------------------- part A: cw-ODMR
  task automatic run_cw_odmr();
    longint s [N_A];
    part = 1; n_cfg = N_A;
    reset_dut();
    wr(REG_AI_BASE + 0, TRIG_PWM); wr(REG_AI_BASE + 1, 0); wr(REG_AI_BASE + 2, W_A);
    wr(REG_AI_BASE + 4, TRIG_EXT);
    wr(REG_N, N_A); wr(REG_R, 1); wr(REG_S, 1);
    wr(REG_MSG_BASE + 1, PERIOD_A); wr(REG_MSG_BASE + 2, HIGH_A);
    wr(REG_CTRL, 1);
    wr(REG_CMD, 1);
    wr(REG_MSG_BASE + 0, 32'b0010);                 // pulses on, DAC in DDS mode
    while (got.size() < N_A) @(negedge clk);
    repeat (10) @(negedge clk);
    chk(gpio_rdata[0] == 1'b1, "cw-ODMR: CH1 sequence done");
    chk(got.size() == N_A, "cw-ODMR: packet count");
    for (int k = 0; k < N_A && k < got.size(); k++) begin
      chk(exp_pkt[0].size() > k && got[k] === exp_pkt[0][k], $sformatf("cw-ODMR packet %0d", k));
      chk(got_last[k] == (k == N_A - 1), $sformatf("cw-ODMR t_last %0d", k));
      s[k] = got[k].ai_sum;
      chk(s[k] > 64'sd4294967296, "cw-ODMR: window sum beyond 32 bits");
    end
    $display("cw-ODMR means: %0d %0d %0d, photons %0d %0d %0d", s[0] / W_A, s[1] / W_A, s[2] / W_A,
             got[0].di_count, got[1].di_count, got[2].di_count);
    chk(s[1] / W_A < s[0] / W_A - 400 && s[1] / W_A < s[2] / W_A - 400, "cw-ODMR: dip at the resonant point");
    chk(pwm_periods.size() >= 2, "cw-ODMR: pulse periods seen");
    foreach (pwm_periods[i]) chk(pwm_periods[i] == PERIOD_A, $sformatf("pulse period %0d", pwm_periods[i]));
    foreach (pwm_highs[i])   chk(pwm_highs[i] == HIGH_A, $sformatf("pulse high time %0d", pwm_highs[i]));
    chk(win_lens.size() == N_A, "cw-ODMR: window count");
    foreach (win_lens[i])    chk(win_lens[i] == W_A, $sformatf("window length %0d", win_lens[i]));
    foreach (win_offs[i])    chk(win_offs[i] == win_offs[0] && win_offs[0] <= 4, $sformatf("window offset %0d", win_offs[i]));
  endtask

  // ---------------------------------------------------------------- part B: lock-in
  task automatic run_lockin();
    int idx [2][$];
    longint xk [int], yk [int];
    longint sx = 0, sy = 0, sxx = 0, syy = 0, sxy = 0, sxy_q = 0;
    int np = 0, nq = 0;
    longint sx_q = 0, sy_q = 0, sxx_q = 0, syy_q = 0;
    part = 2; n_cfg = N_B;
    reset_dut();
    for (int c = 0; c < 2; c++) begin
      wr(REG_AI_BASE + 8'(4*c) + 0, TRIG_PWM); wr(REG_AI_BASE + 8'(4*c) + 1, 0);
      wr(REG_AI_BASE + 8'(4*c) + 2, W_B);
    end
    wr(REG_N, N_B); wr(REG_R, 1); wr(REG_S, 1); wr(REG_M, 4096);
    wr(REG_MSG_BASE + 8 + 3, 32'(FTW_B)); wr(REG_MSG_BASE + 8 + 6, 32'(FTW_B >> 32));
    wr(REG_MSG_BASE + 8 + 5, AMP_B);
    wr(REG_MSG_BASE + 8 + 0, 0);                    // sine, DDS mode
    wr(REG_MSG_BASE + 1, PERIOD_B); wr(REG_MSG_BASE + 2, PERIOD_B / 2);
    wr(REG_CTRL, 3);                                // run, continuous pattern
    wr(REG_CMD, 1);
    wr(REG_MSG_BASE + 0, 32'b0010);
    while (nwin[1] < 2200) @(negedge clk);
    wr(REG_CMD, 8);                                 // read command
    while (got.size() == 0 || !got_last[got.size() - 1]) @(negedge clk);
    repeat (10) @(negedge clk);
    chk(got.size() == 4096, $sformatf("lock-in: read-out of %0d packets", got.size()));
    foreach (got[i]) begin
      automatic int c = got[i].chan;
      automatic int k = got[i].point;
      chk(k < exp_pkt[c].size() && got[i] === exp_pkt[c][k], $sformatf("lock-in packet %0d ch%0d point %0d", i, c, k));
      if (idx[c].size() > 0) chk(k == idx[c][$] + 1, $sformatf("lock-in: windows in order, ch%0d %0d after %0d at %0d", c, k, idx[c][$], i));
      idx[c].push_back(k);
    end
    // photon counts of CH1 against the modulation acquired on CH2, as read out, at zero
    // lag and at a quarter period (41 windows per modulation period)
    foreach (got[i])
      if (got[i].chan) xk[got[i].point] = got[i].ai_sum / W_B;
      else             yk[got[i].point] = got[i].di_count;
    foreach (xk[k]) begin
      if (yk.exists(k)) begin
        sx += xk[k]; sy += yk[k]; sxx += xk[k] * xk[k]; syy += yk[k] * yk[k]; sxy += xk[k] * yk[k]; np++;
      end
      if (yk.exists(k + 10)) begin
        sx_q += xk[k]; sy_q += yk[k + 10]; sxx_q += xk[k] * xk[k];
        syy_q += yk[k + 10] * yk[k + 10]; sxy_q += xk[k] * yk[k + 10]; nq++;
      end
    end
    begin
      real r0, rq;
      r0 = (real'(np) * sxy - real'(sx) * sy) /
           $sqrt((real'(np) * sxx - real'(sx) * sx) * (real'(np) * syy - real'(sy) * sy));
      rq = (real'(nq) * sxy_q - real'(sx_q) * sy_q) /
           $sqrt((real'(nq) * sxx_q - real'(sx_q) * sx_q) * (real'(nq) * syy_q - real'(sy_q) * sy_q));
      $display("lock-in: %0d window pairs, correlation at zero lag %f, at a quarter period %f", np, r0, rq);
      chk(np > 1900, "lock-in: enough window pairs");
      chk(r0 > 0.6, "lock-in: counts follow the modulation in phase");
      chk(r0 > rq + 0.3, "lock-in: zero lag beats a quarter period");
    end
  endtask

  initial begin
    run_cw_odmr();
    run_lockin();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (14_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
