// tb_pwm_gen: for several period/high pairs, measures the high and low run lengths of
// the output over a number of periods and compares them with the settings; also
// checks the constant-low (high = 0), constant-high (high >= period) and disabled
// cases.
module tb_pwm_gen;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic en = 0, pwm;
  logic [31:0] period, high;
  int checks = 0, failures = 0;

  pwm_gen dut (.*);

  task automatic measure(input int p, input int h);
    int hi, lo;
    en <= 0; period <= p; high <= h;
    repeat (2) @(posedge clk);
    en <= 1;
    // first rising edge of the output
    do @(posedge clk); while (pwm !== 1);
    for (int k = 0; k < 4; k++) begin
      hi = 0; lo = 0;
      while (pwm === 1) begin hi++; @(posedge clk); end
      while (pwm === 0) begin lo++; @(posedge clk); end
      checks += 2;
      if (hi != h) begin failures++; $display("FAIL p=%0d h=%0d high run %0d", p, h, hi); end
      if (lo != p - h) begin failures++; $display("FAIL p=%0d h=%0d low run %0d", p, h, lo); end
    end
  endtask

  initial begin
    period = 10; high = 3;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    measure(10, 3);
    measure(25, 20);   // duty 0.8 as in the published trigger train, scaled down
    measure(2, 1);
    measure(7, 6);
    // constant levels
    en <= 1; period <= 9; high <= 0; repeat (30) @(posedge clk);
    for (int k = 0; k < 20; k++) begin @(posedge clk); checks++; if (pwm !== 0) failures++; end
    high <= 12; repeat (3) @(posedge clk);
    for (int k = 0; k < 20; k++) begin @(posedge clk); checks++; if (pwm !== 1) failures++; end
    en <= 0; repeat (2) @(posedge clk);
    for (int k = 0; k < 20; k++) begin @(posedge clk); checks++; if (pwm !== 0) failures++; end
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
