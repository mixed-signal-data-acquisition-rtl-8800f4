// tb_sample_fifo: random push/pop traffic against a queue model: head word, empty,
// full and the sticky overflow flag are compared every cycle.
module tb_sample_fifo;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic push = 0, pop = 0;
  logic [14:0] din = 0, dout;
  logic empty, full, overflow;
  int checks = 0, failures = 0;

  sample_fifo #(.W(15), .DEPTH(8)) dut (.*);

  logic [14:0] q[$];
  logic ovf_ref = 0;
  always @(posedge clk) begin
    logic ps, pp; logic [14:0] d;
    ps = push; pp = pop; d = din;
    if (rst_n) begin
      // update the model as the DUT does at this edge, then compare
      begin
        logic was_full, was_empty;
        was_full = (q.size() == 8); was_empty = (q.size() == 0);
        if (pp && !was_empty) void'(q.pop_front());
        if (ps && !was_full) q.push_back(d);
        if (ps && was_full) ovf_ref = 1;
      end
      #1;
      checks += 3;
      if (empty !== (q.size() == 0)) begin failures++; $display("FAIL empty"); end
      if (full !== (q.size() == 8)) begin failures++; $display("FAIL full"); end
      if (overflow !== ovf_ref) begin failures++; $display("FAIL overflow"); end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL dout %h exp %h", dout, q[0]); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      automatic int phase = (i / 300) % 3;   // fill-heavy, balanced, drain-heavy
      push <= ($urandom_range(0, 99) < (phase == 0 ? 80 : phase == 1 ? 50 : 20));
      pop  <= ($urandom_range(0, 99) < (phase == 0 ? 20 : phase == 1 ? 50 : 80));
      din  <= 15'($urandom);
      @(posedge clk);
    end
    checks++;
    if (!ovf_ref) begin failures++; $display("FAIL overflow never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
