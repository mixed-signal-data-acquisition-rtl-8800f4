// tb_dds: for each shape and several tuning words, phase offsets and amplitudes, the
// generator is reset and its output compared sample by sample with a model that
// computes the waveform from the ideal phase (c-3)*ftw + phase_off. The sine is
// compared with round(8191*sin(phase)) within 8 LSB (4096-point table); square,
// triangle and sawtooth must match exactly. Includes a 10 MHz tone, a near-Nyquist
// tone and the 0.1 Hz tuning word (225180).
module tb_dds;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [47:0] ftw = 0;
  logic [31:0] phase_off = 0;
  logic [13:0] amp = 0;
  shape_e shape = SHAPE_SINE;
  logic signed [13:0] sample;
  int checks = 0, failures = 0, maxerr = 0;

  dds dut (.*);

  function automatic int model(input longint unsigned p, input shape_e sh, input int a);
    real ph = real'(p) / 281474976710656.0;   // 2^48
    int v;
    longint unsigned t;
    case (sh)
      SHAPE_SINE:   v = $rtoi($floor(8191.0 * $sin(2.0 * 3.14159265358979 * ph) + 0.5));
      SHAPE_SQUARE: v = (p < 64'h8000_0000_0000) ? 8191 : -8191;
      SHAPE_TRIANGLE: begin
        if (p < 64'h8000_0000_0000) t = p >> 33;
        else t = 16383 - ((p - 64'h8000_0000_0000) >> 33);
        v = int'(t) - 8192;
      end
      default: v = int'(p >> 34) - 8192;
    endcase
    if (a > 8192) a = 8192;
    return int'($floor(real'(v) * real'(a) / 8192.0));
  endfunction

  task automatic run(input longint f, input longint off, input int a, input shape_e sh, input int n);
    rst_n <= 0; ftw <= 48'(f); phase_off <= 32'(off); amp <= 14'(a); shape <= sh;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int c = 1; c <= n; c++) begin
      @(posedge clk); #1;
      if (c >= 3) begin
        automatic longint unsigned p = (longint'(c - 3) * f + (off << 16)) & 64'hFFFF_FFFF_FFFF;
        automatic int e = model(p, sh, a);
        automatic int d = int'(sample) - e;
        automatic int tol = (sh == SHAPE_SINE) ? 8 : 0;
        if (d < 0) d = -d;
        if (d > maxerr && sh == SHAPE_SINE) maxerr = d;
        checks++;
        if (d > tol) begin failures++; if (failures < 10) $display("FAIL sh=%0d c=%0d got %0d exp %0d", sh, c, sample, e); end
      end
    end
  endtask

  initial begin
    // 10 MHz: ftw = 10e6/125e6 * 2^48
    run(64'd22517998136852, 0, 8192, SHAPE_SINE, 200);
    run(64'd22517998136852, 32'h4000_0000, 4000, SHAPE_SINE, 200);
    run(64'd140700000000000, 0, 8191, SHAPE_SINE, 100);        // just under 62.5 MHz
    run(64'd809086419753, 32'h1234_5678, 9000, SHAPE_SINE, 800); // amp limited to unity
    run(64'd225180, 32'hC000_0000, 8192, SHAPE_SINE, 50);        // 0.1 Hz
    for (int s = 1; s < 4; s++) begin
      run(64'd6472749531543, 0, 8192, shape_e'(s), 300);
      run(64'd509724737000, 32'h9000_0000, 3000, shape_e'(s), 1200);
    end
    $display("max sine error %0d LSB", maxerr);
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
