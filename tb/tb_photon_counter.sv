// tb_photon_counter: random pulse trains (1-3 cycles high, 1-4 low) on the input and
// random windows; the count reported at each window end must equal the number of
// rising edges the reference sees inside the window, with the input delayed by the
// three-flip-flop synchroniser/edge detector.
module tb_photon_counter;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic di = 0, win = 0, win_last = 0;
  logic [31:0] count;
  logic count_valid;
  int checks = 0, failures = 0;

  photon_counter dut (.*);

  // Reference: edges of di as sampled at clock edges, delayed 2 edges (sync), then
  // counted at the edge where win is sampled high.
  logic [3:0] hist = 0;
  int ref_cnt = 0, ref_total = 0, windows = 0;
  always @(posedge clk) begin
    logic e, w, wl;
    hist = {hist[2:0], di};
    e = hist[2] & ~hist[3];   // sync[1] & ~sync[2] before this edge's update
    w = win; wl = win_last;
    if (rst_n) begin
      if (w) ref_cnt += e;
      if (w && wl) begin ref_total = ref_cnt; ref_cnt = 0; end
      if (!w) ref_cnt = 0;
      #1;
      if (w && wl) begin
        checks += 2;
        if (!count_valid) begin failures++; $display("FAIL no valid"); end
        if (count !== 32'(ref_total)) begin failures++; $display("FAIL count got %0d exp %0d", count, ref_total); end
        windows++;
      end else begin
        checks++;
        if (count_valid) begin failures++; $display("FAIL spurious valid"); end
      end
    end
  end

  // Pulse generator.
  initial begin
    forever begin
      repeat ($urandom_range(1, 4)) @(posedge clk);
      di <= 1;
      repeat ($urandom_range(1, 3)) @(posedge clk);
      di <= 0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      automatic int len = $urandom_range(1, 60);
      for (int k = 0; k < len; k++) begin
        win <= 1; win_last <= (k == len - 1);
        @(posedge clk);
      end
      win <= 0; win_last <= 0;
      repeat ($urandom_range(1, 5)) @(posedge clk);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (windows != 200) begin failures++; $display("FAIL windows=%0d", windows); end
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
