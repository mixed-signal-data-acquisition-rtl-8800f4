// tb_adc_frontend: random raw ADC words and bias values on both channels; each output
// is compared, two clocks later, with 8191 - raw - bias saturated to [-8192, 8191].
// Includes the two published corner codes (0x0000 -> +8191, 0x3FFF -> -8192).
module tb_adc_frontend;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [13:0] adc_a, adc_b;
  logic signed [13:0] bias_a, bias_b, ai_a, ai_b;
  logic ai_valid;
  int checks = 0, failures = 0;

  adc_frontend dut (.*);

  function automatic int expect_v(int raw, int b);
    int v = 8191 - raw - b;
    if (v > 8191) v = 8191;
    if (v < -8192) v = -8192;
    return v;
  endfunction

  initial begin
    adc_a = 0; adc_b = 0; bias_a = 0; bias_b = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 400; i++) begin
      int a, b, x, y;
      case (i)
        0: begin a = 0; b = 16383; x = 0; y = 0; end
        1: begin a = 16383; b = 0; x = 0; y = 0; end
        2: begin a = 0; b = 16383; x = -100; y = 100; end   // saturation
        default: begin a = $urandom_range(0, 16383); b = $urandom_range(0, 16383);
                       x = int'($urandom_range(0, 400)) - 200; y = int'($urandom_range(0, 400)) - 200; end
      endcase
      adc_a <= 14'(a); adc_b <= 14'(b); bias_a <= 14'(x); bias_b <= 14'(y);
      @(posedge clk);
    end
  end

  // At edge e the DUT takes raw(e) into its input register and outputs
  // f(raw(e-1), bias(e)); the checker samples the inputs as the DUT sees them.
  int n = 0, raw_prev_a, raw_prev_b;
  always @(posedge clk) begin
    int cra, crb, cba, cbb, ea, eb;
    cra = adc_a; crb = adc_b; cba = bias_a; cbb = bias_b;
    if (rst_n) begin
      #1;
      if (n >= 2) begin
        ea = expect_v(raw_prev_a, cba);
        eb = expect_v(raw_prev_b, cbb);
        checks += 3;
        if (ai_a !== 14'(ea)) begin failures++; $display("FAIL a n=%0d got %0d exp %0d", n, ai_a, ea); end
        if (ai_b !== 14'(eb)) begin failures++; $display("FAIL b n=%0d got %0d exp %0d", n, ai_b, eb); end
        if (!ai_valid) failures++;
      end
      n++;
      if (n == 395) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    raw_prev_a = cra; raw_prev_b = crb;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
