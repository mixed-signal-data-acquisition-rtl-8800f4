// tb_trig_window: drives trigger edges from each source with random D and W and
// checks the window against a cycle-exact reference: an edge detected in cycle t opens
// the window in cycles t+D+1 .. t+D+W; triggers during a busy window are ignored, and
// none is accepted while 'arm' is low.
module tb_trig_window;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic arm, ext_trig, int_trig, sw_trig;
  trig_sel_e trig_sel;
  logic [31:0] delay_d, width_w;
  logic win, win_start, win_last, busy;
  int checks = 0, failures = 0;

  trig_window dut (.*);

  // Reference, counted in clock edges: an edge seen at clock edge k (by the values
  // the DUT samples there) gives a window after edges k+D .. k+D+W-1, provided the
  // DUT was idle after edge k-1.
  longint cyc = 0, ref_start = -1, ref_end = -2;
  logic lvl_q = 0;
  logic [1:0] sync_m = 0;
  always @(posedge clk) begin
    logic lvl, ref_win, edge_seen, a;
    longint d, w;
    lvl = (trig_sel == TRIG_EXT) ? sync_m[1] : (trig_sel == TRIG_PWM) ? int_trig : sw_trig;
    edge_seen = lvl && !lvl_q;
    a = arm; d = delay_d; w = (width_w == 0) ? 1 : width_w;
    lvl_q = rst_n ? lvl : 1'b0;
    sync_m = rst_n ? {sync_m[0], ext_trig} : 2'b00;
    if (rst_n) begin
      if (edge_seen && a && cyc - 1 > ref_end) begin
        ref_start = cyc + d;
        ref_end   = ref_start + w - 1;
      end
      #1;
      ref_win = (cyc >= ref_start && cyc <= ref_end);
      checks += 3;
      if (win !== ref_win) begin failures++; $display("FAIL win cyc=%0d got %b exp %b", cyc, win, ref_win); end
      if (win_start !== (cyc == ref_start)) begin failures++; $display("FAIL start cyc=%0d", cyc); end
      if (win_last !== (cyc == ref_end)) begin failures++; $display("FAIL last cyc=%0d", cyc); end
    end
    cyc++;
  end

  int windows = 0;
  always @(posedge clk) if (win_last) windows++;

  task automatic pulse(input int which, input int len);
    if (which == 0) ext_trig <= 1; else if (which == 1) int_trig <= 1; else sw_trig <= 1;
    repeat (len) @(posedge clk);
    ext_trig <= 0; int_trig <= 0; sw_trig <= 0;
  endtask

  initial begin
    arm = 1; ext_trig = 0; int_trig = 0; sw_trig = 0; trig_sel = TRIG_EXT; delay_d = 3; width_w = 5;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 120; i++) begin
      automatic int src = i % 3;
      trig_sel <= trig_sel_e'(src);
      delay_d  <= (i % 7 == 0) ? 0 : $urandom_range(0, 12);
      width_w  <= (i % 11 == 0) ? 0 : $urandom_range(1, 12);
      arm      <= (i % 13 != 5);
      @(posedge clk);
      pulse(src, $urandom_range(1, 3));
      // sometimes re-trigger while busy
      repeat ($urandom_range(1, 8)) @(posedge clk);
      if (i % 4 == 0) pulse(src, 1);
      repeat (30) @(posedge clk);
    end
    checks++;
    if (windows < 90) begin failures++; $display("FAIL only %0d windows", windows); end
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
