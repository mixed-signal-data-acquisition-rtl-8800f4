// tb_msg: channel 0 in PWM mode, channel 1 in DDS mode (sawtooth, exact), then the
// modes swapped. Checks the offset-binary DAC words (PWM levels +amp / -amp, DDS
// samples four clocks after the phase), the PWM run lengths on the digital outputs,
// and mid-scale output during reset.
module tb_msg;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  msg_cfg_t cfg [2];
  logic [13:0] dac [2];
  logic [1:0] pwm_out;
  int checks = 0, failures = 0;

  msg dut (.*);

  function automatic logic [13:0] ob(input int v);   // offset binary
    return 14'(v + 8192);
  endfunction

  function automatic int saw(input longint unsigned p, input int a);
    return int'($floor(real'(int'(p >> 34) - 8192) * real'(a) / 8192.0));
  endfunction

  task automatic run(input int pc, input int dc);
    automatic int hi = 0, lo = 0, runs = 0;
    automatic logic prev = 0;
    rst_n <= 0;
    cfg[pc] <= '0; cfg[dc] <= '0;
    @(posedge clk);
    cfg[pc].pwm_mode <= 1; cfg[pc].pwm_en <= 1; cfg[pc].pwm_period <= 12; cfg[pc].pwm_high <= 5;
    cfg[pc].amp <= 14'd3000;
    cfg[dc].pwm_mode <= 0; cfg[dc].ftw <= 48'd3640915555555; cfg[dc].amp <= 14'd8192;
    cfg[dc].shape <= SHAPE_SAWTOOTH;
    @(posedge clk); #1;
    checks += 2;
    if (dac[0] !== 14'h2000 || dac[1] !== 14'h2000) begin failures++; $display("FAIL reset level"); end
    rst_n <= 1;
    for (int c = 1; c <= 400; c++) begin
      @(posedge clk); #1;
      // PWM channel: level follows its pulse of the previous cycle
      checks++;
      if (c > 2 && dac[pc] !== ob(prev ? 3000 : -3000)) begin failures++; $display("FAIL pwm level c=%0d", c); end
      if (c > 2) begin
        if (pwm_out[pc]) hi++; else lo++;
      end
      prev = pwm_out[pc];
      if (c >= 4) begin
        automatic longint unsigned p = (longint'(c - 4) * 3640915555555) & 64'hFFFF_FFFF_FFFF;
        checks++;
        if (dac[dc] !== ob(saw(p, 8192))) begin failures++; $display("FAIL dds c=%0d got %h exp %h", c, dac[dc], ob(saw(p, 8192))); end
      end
    end
    // 398 cycles of a 12-cycle period with 5 high: 33 full periods + 2 cycles
    checks++;
    if (hi < 33 * 5 || hi > 33 * 5 + 2 || hi + lo != 398) begin failures++; $display("FAIL duty hi=%0d lo=%0d", hi, lo); end
  endtask

  initial begin
    cfg[0] = '0; cfg[1] = '0;
    run(0, 1);
    run(1, 0);
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
