// tb_ctrl_regs: writes random values to every register of the map, reads each back,
// checks the decoded settings on the outputs, the reset values, the status read-back
// and that command writes give one-cycle strobes.
module tb_ctrl_regs;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [7:0] gpio_addr = 0;
  logic [31:0] gpio_wdata = 0, gpio_rdata;
  logic gpio_we = 0;
  logic run, continuous, start, rd_cmd;
  logic [1:0] sw_trig;
  logic [15:0] n_pts, s_rep, r_rep;
  logic [12:0] m_len;
  ai_cfg_t ai_cfg [2];
  msg_cfg_t msg_cfg [2];
  logic [5:0] status = 6'h2d;
  int checks = 0, failures = 0;

  ctrl_regs dut (.*);

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    // inputs change on the falling edge, away from the sampling edge
    @(negedge clk);
    gpio_addr = a; gpio_wdata = d; gpio_we = 1;
    @(negedge clk);
    gpio_we = 0;
  endtask

  task automatic rd_chk(input logic [7:0] a, input logic [31:0] e);
    @(negedge clk);
    gpio_addr = a;
    #1;
    checks++;
    if (gpio_rdata !== e) begin failures++; $display("FAIL read %h got %h exp %h", a, gpio_rdata, e); end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    chk(!run && !continuous && n_pts == 1 && s_rep == 1 && r_rep == 1 && m_len == 4096, "reset values");
    chk(ai_cfg[0].width_w == 1 && ai_cfg[1].delay_d == 0 && msg_cfg[0].pwm_en == 0, "reset cfg");
    for (int it = 0; it < 20; it++) begin
      automatic logic [31:0] v[16];
      foreach (v[i]) v[i] = $urandom;
      wr(REG_CTRL, v[0]); wr(REG_N, v[1]); wr(REG_S, v[2]); wr(REG_R, v[3]); wr(REG_M, v[4]);
      for (int c = 0; c < 2; c++) begin
        wr(REG_AI_BASE + 8'(4*c) + 0, v[5]);
        wr(REG_AI_BASE + 8'(4*c) + 1, v[6] + c);
        wr(REG_AI_BASE + 8'(4*c) + 2, v[7] + c);
        wr(REG_AI_BASE + 8'(4*c) + 3, v[8] + c);
        wr(REG_MSG_BASE + 8'(8*c) + 0, v[9]);
        wr(REG_MSG_BASE + 8'(8*c) + 1, v[10] + c);
        wr(REG_MSG_BASE + 8'(8*c) + 2, v[11] + c);
        wr(REG_MSG_BASE + 8'(8*c) + 3, v[12] + c);
        wr(REG_MSG_BASE + 8'(8*c) + 4, v[13] + c);
        wr(REG_MSG_BASE + 8'(8*c) + 5, v[14] + c);
        wr(REG_MSG_BASE + 8'(8*c) + 6, v[15] + c);
      end
      #1;
      chk(run == v[0][0] && continuous == v[0][1], "ctrl");
      chk(n_pts == v[1][15:0] && s_rep == v[2][15:0] && r_rep == v[3][15:0] && m_len == v[4][12:0], "nsrm");
      for (int c = 0; c < 2; c++) begin
        chk(ai_cfg[c].trig_sel == trig_sel_e'(v[5][1:0]) && ai_cfg[c].delay_d == v[6] + c &&
            ai_cfg[c].width_w == v[7] + c && ai_cfg[c].bias == 14'(v[8] + c), $sformatf("ai cfg %0d %h %h %h %h", c, ai_cfg[c].trig_sel, v[5], ai_cfg[c].bias, v[8]));
        chk(msg_cfg[c].pwm_mode == v[9][0] && msg_cfg[c].pwm_en == v[9][1] && msg_cfg[c].shape == shape_e'(v[9][3:2]) &&
            msg_cfg[c].pwm_period == v[10] + c && msg_cfg[c].pwm_high == v[11] + c && msg_cfg[c].ftw == {16'(v[15] + c), 32'(v[12] + c)} &&
            msg_cfg[c].phase_off == v[13] + c && msg_cfg[c].amp == 14'(v[14] + c), "msg cfg");
        rd_chk(REG_AI_BASE + 8'(4*c) + 1, v[6] + c);
        rd_chk(REG_MSG_BASE + 8'(8*c) + 3, v[12] + c);
        rd_chk(REG_MSG_BASE + 8'(8*c) + 0, {28'd0, v[9][3:0]});
        rd_chk(REG_MSG_BASE + 8'(8*c) + 6, {16'd0, 16'(v[15] + c)});
      end
      rd_chk(REG_N, {16'd0, v[1][15:0]});
      rd_chk(REG_M, {19'd0, v[4][12:0]});
      rd_chk(REG_CTRL, {30'd0, v[0][1:0]});
    end
    rd_chk(REG_STATUS, 32'h2d);
    // command strobes last one cycle
    wr(REG_CMD, 32'hf);
    #1 chk(start && sw_trig == 2'b11 && rd_cmd, "strobes high");
    @(posedge clk); #1 chk(!start && sw_trig == 0 && !rd_cmd, "strobes one cycle");
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
