// tb_sap_accum: feeds windows of random signed samples (1..40 per window, including
// full-scale runs) through a model FIFO, pulses the digital count one cycle after each
// window's last sample, and checks every packet field: channel, sequence position,
// the 48-bit sum (computed here independently) and the count. Also checks win_done.
module tb_sap_accum;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [14:0] fifo_dout;
  logic fifo_empty, fifo_pop, di_count_valid = 0, pkt_valid, win_done;
  logic [31:0] di_count = 0;
  logic [14:0] point = 0;
  logic [15:0] s_idx = 0, r_idx = 0;
  pkt_t pkt;
  int checks = 0, failures = 0;

  sap_accum #(.CHAN(1'b0)) dut (.*);

  // model FIFO
  logic [14:0] q[$];
  always @(negedge clk) begin
    fifo_empty <= (q.size() == 0);
    fifo_dout  <= (q.size() == 0) ? '0 : q[0];
  end
  always @(posedge clk) if (fifo_pop && q.size() > 0) void'(q.pop_front());

  longint exp_sum[$];
  int     exp_cnt[$];
  int     exp_pt[$];
  int     npk = 0, ndone = 0;

  always @(posedge clk) begin
    #1;
    if (rst_n && pkt_valid) begin
      checks += 5;
      if (pkt.chan !== 1'b0) failures++;
      if (pkt.ai_sum !== 48'(exp_sum[npk])) begin failures++; $display("FAIL sum %0d exp %0d", pkt.ai_sum, exp_sum[npk]); end
      if (pkt.di_count !== 32'(exp_cnt[npk])) begin failures++; $display("FAIL cnt %0d exp %0d", pkt.di_count, exp_cnt[npk]); end
      if (pkt.point !== 15'(exp_pt[npk])) begin failures++; $display("FAIL point"); end
      if (pkt.r_idx !== 16'(exp_pt[npk] + 1) || pkt.s_idx !== 16'(exp_pt[npk] + 2)) failures++;
      npk++;
    end
  end
  always @(posedge clk) if (rst_n && win_done) ndone++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int w = 0; w < 150; w++) begin
      automatic int len = (w % 10 == 0) ? 40 : $urandom_range(1, 40);
      automatic longint sum = 0;
      automatic int cnt = $urandom_range(0, 100000);
      point <= 15'(w); r_idx <= 16'(w + 1); s_idx <= 16'(w + 2);
      for (int k = 0; k < len; k++) begin
        automatic int v = (w % 10 == 0) ? ((w % 20 == 0) ? 8191 : -8192) : int'($urandom_range(0, 16383)) - 8192;
        sum += v;
        q.push_back({k == len - 1, 14'(v)});
        // the count is valid in the cycle the last sample can first be popped
        if (k == len - 1) begin di_count <= cnt; di_count_valid <= 1; end
        @(posedge clk);
      end
      exp_sum.push_back(sum); exp_cnt.push_back(cnt); exp_pt.push_back(w);
      di_count_valid <= 0; di_count <= 32'hdead;
      repeat ($urandom_range(3, 6)) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    checks += 2;
    if (npk != 150) begin failures++; $display("FAIL packets %0d", npk); end
    if (ndone != 150) begin failures++; $display("FAIL win_done %0d", ndone); end
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
