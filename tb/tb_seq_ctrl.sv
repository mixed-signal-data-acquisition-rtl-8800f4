// tb_seq_ctrl: for several (N, S, R) settings, steps the controller with random gaps
// and checks that the positions follow the published order (every point repeated R
// times before the next, the whole run repeated S times), that done rises exactly on
// step N*R*S, that further steps are ignored, and that continuous mode wraps.
module tb_seq_ctrl;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic start = 0, continuous = 0, step = 0;
  logic [15:0] n_pts, s_rep, r_rep, point, s_idx, r_idx;
  logic done, at_end;
  int checks = 0, failures = 0;

  seq_ctrl dut (.*);

  task automatic chk(input int p, input int s, input int r, input bit d);
    #1;
    checks += 4;
    if (point !== 16'(p)) begin failures++; $display("FAIL point %0d exp %0d", point, p); end
    if (s_idx !== 16'(s)) begin failures++; $display("FAIL s %0d exp %0d", s_idx, s); end
    if (r_idx !== 16'(r)) begin failures++; $display("FAIL r %0d exp %0d", r_idx, r); end
    if (done !== d) begin failures++; $display("FAIL done %b exp %b", done, d); end
  endtask

  task automatic do_step();
    step <= 1; @(posedge clk); step <= 0;
    repeat ($urandom_range(0, 2)) @(posedge clk);
  endtask

  initial begin
    int cfg[5][3] = '{'{3, 2, 4}, '{1, 1, 1}, '{5, 1, 2}, '{2, 3, 1}, '{0, 2, 2}};
    n_pts = 1; s_rep = 1; r_rep = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int c = 0; c < 5; c++) begin
      automatic int n = cfg[c][0] == 0 ? 1 : cfg[c][0], s = cfg[c][1], r = cfg[c][2];
      n_pts <= 16'(cfg[c][0]); s_rep <= 16'(s); r_rep <= 16'(r);
      start <= 1; @(posedge clk); start <= 0;
      chk(0, 0, 0, 0);
      for (int si = 0; si < s; si++)
        for (int p = 0; p < n; p++)
          for (int ri = 0; ri < r; ri++) begin
            automatic bit last = (si == s - 1) && (p == n - 1) && (ri == r - 1);
            checks++;
            if (at_end !== last) begin failures++; $display("FAIL at_end"); end
            do_step();
            if (last) chk(0, 0, 0, 1);
            else if (ri + 1 < r) chk(p, si, ri + 1, 0);
            else if (p + 1 < n) chk(p + 1, si, 0, 0);
            else chk(0, si + 1, 0, 0);
          end
      do_step();
      chk(0, 0, 0, 1);
    end
    // continuous: wraps, never done
    continuous <= 1; n_pts <= 2; s_rep <= 1; r_rep <= 2;
    start <= 1; @(posedge clk); start <= 0;
    for (int k = 0; k < 9; k++) begin do_step(); #1; end
    chk(0, 0, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
