// tb_cont_buffer: writes numbered packets (fewer and more than the buffer holds),
// issues read commands with various M under random back-pressure, and checks that
// exactly the newest min(M, held) packets come out oldest first with out_last on the
// final one, that packets written during a read-out are dropped and counted, and that
// cyclic writing resumes afterwards. A packet written in the same cycle as a read
// command must be part of that read-out. Uses a 16-entry buffer for short runs.
module tb_cont_buffer;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic wr_valid = 0, rd_cmd = 0, out_valid, out_last, out_ready = 0, busy;
  logic [127:0] wr_data = 0, out_data;
  logic [4:0] m_len = 0;
  logic [31:0] dropped;
  int checks = 0, failures = 0;

  cont_buffer #(.DEPTH(D)) dut (.*);

  longint written[$];   // every value accepted into the buffer
  longint seq = 1000;
  int exp_drop = 0;

  task automatic write_n(input int n);
    for (int i = 0; i < n; i++) begin
      wr_valid <= 1; wr_data <= 128'(seq) << 64 | 128'(seq);
      @(posedge clk);
      #1; if (!busy) written.push_back(seq);
      seq++;
    end
    wr_valid <= 0;
  endtask

  // write_with_cmd: a packet is written in the very cycle of the read command; it
  // must be kept and be the newest packet of the read-out.
  task automatic read_m(input int m, input bit write_during, input bit write_with_cmd = 0);
    automatic int held, len;
    automatic int got = 0;
    automatic int cyc = 0;
    if (write_with_cmd) begin
      wr_valid <= 1; wr_data <= 128'(seq) << 64 | 128'(seq);
      written.push_back(seq);
      seq++;
    end
    held = written.size() > D ? D : written.size();
    len = (m == 0 || m > held) ? held : m;
    m_len <= 5'(m); rd_cmd <= 1;
    @(posedge clk);
    rd_cmd <= 0; wr_valid <= 0;
    while (got < len && cyc < 500) begin
      out_ready <= ($urandom_range(0, 2) != 0);
      if (write_during) begin wr_valid <= 1; wr_data <= 128'(seq); end
      @(posedge clk);
      cyc++;
      if (write_during) begin seq++; exp_drop++; end
      if (out_valid && out_ready) begin
        automatic longint e = written[written.size() - len + got];
        checks += 2;
        if (out_data[63:0] !== 64'(e)) begin failures++; $display("FAIL data %0d exp %0d", out_data[63:0], e); end
        if (out_last !== (got == len - 1)) begin failures++; $display("FAIL last at %0d", got); end
        got++;
      end
    end
    wr_valid <= 0;
    out_ready <= 0;
    checks++;
    if (got != len) begin failures++; $display("FAIL got %0d of %0d", got, len); end
    repeat (3) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    read_m(4, 0);          // nothing held: nothing sent
    write_n(5);
    read_m(3, 0);
    read_m(0, 0);          // all held (5)
    read_m(16, 0);         // more than held
    write_n(40);           // wraps
    read_m(16, 1);         // full depth, writes dropped meanwhile
    read_m(7, 0);
    write_n(3);
    read_m(10, 0);
    read_m(16, 0, 1);      // write in the command's cycle, full depth
    write_n(2);
    read_m(3, 0, 1);
    read_m(0, 1, 1);
    checks++;
    if (dropped !== 32'(exp_drop)) begin failures++; $display("FAIL dropped %0d exp %0d", dropped, exp_drop); end
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
