// ctrl_regs: logic-control register file on the processor's GPIO command bus.
//
// The processor writes settings with (gpio_addr, gpio_wdata, gpio_we) and reads them
// back, or reads status, through gpio_rdata (combinational). The register map is in
// daq_pkg. Writing REG_CMD produces one-cycle command strobes in the following clock:
// bit 0 start (clears the sequence and the packet path), bit 1/2 software trigger of
// CH1/CH2, bit 3 read command of the continuous buffer. The paper says only that
// commands reach the logic over GPIO; the bus format and the map are this design's.
//
// Reset values: everything 0 (not running, sequence pattern, triggers external,
// D = 0, W = 1, N = S = R = 1, M = 4096, generators off).
module ctrl_regs
  import daq_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        gpio_addr,
  input  logic [31:0]       gpio_wdata,
  input  logic              gpio_we,
  output logic [31:0]       gpio_rdata,
  output logic              run,
  output logic              continuous,
  output logic              start,
  output logic [1:0]        sw_trig,
  output logic              rd_cmd,
  output logic [IDX_W-1:0]  n_pts,
  output logic [IDX_W-1:0]  s_rep,
  output logic [IDX_W-1:0]  r_rep,
  output logic [12:0]       m_len,
  output ai_cfg_t           ai_cfg  [2],
  output msg_cfg_t          msg_cfg [2],
  input  logic [5:0]        status
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run        <= 1'b0;
      continuous <= 1'b0;
      start      <= 1'b0;
      sw_trig    <= '0;
      rd_cmd     <= 1'b0;
      n_pts      <= IDX_W'(1);
      s_rep      <= IDX_W'(1);
      r_rep      <= IDX_W'(1);
      m_len      <= 13'd4096;
      for (int c = 0; c < 2; c++) begin
        ai_cfg[c]          <= '0;
        ai_cfg[c].width_w  <= TIME_W'(1);
        msg_cfg[c]         <= '0;
      end
    end else begin
      start   <= 1'b0;
      sw_trig <= '0;
      rd_cmd  <= 1'b0;
      if (gpio_we) begin
        unique case (gpio_addr)
          REG_CTRL: {continuous, run} <= gpio_wdata[1:0];
          REG_CMD: begin
            start   <= gpio_wdata[0];
            sw_trig <= gpio_wdata[2:1];
            rd_cmd  <= gpio_wdata[3];
          end
          REG_N: n_pts <= gpio_wdata[IDX_W-1:0];
          REG_S: s_rep <= gpio_wdata[IDX_W-1:0];
          REG_R: r_rep <= gpio_wdata[IDX_W-1:0];
          REG_M: m_len <= gpio_wdata[12:0];
          default: ;
        endcase
        // CH1 at base, CH2 at base + 4 (acquisition) / + 8 (generator)
        if (gpio_addr[7:3] == REG_AI_BASE[7:3]) begin
          unique case (gpio_addr[1:0])
            2'd0: ai_cfg[gpio_addr[2]].trig_sel <= trig_sel_e'(gpio_wdata[1:0]);
            2'd1: ai_cfg[gpio_addr[2]].delay_d  <= gpio_wdata;
            2'd2: ai_cfg[gpio_addr[2]].width_w  <= gpio_wdata;
            default: ai_cfg[gpio_addr[2]].bias  <= gpio_wdata[ADC_W-1:0];
          endcase
        end
        if (gpio_addr[7:4] == REG_MSG_BASE[7:4]) begin
          unique case (gpio_addr[2:0])
            3'd0: begin
              msg_cfg[gpio_addr[3]].pwm_mode <= gpio_wdata[0];
              msg_cfg[gpio_addr[3]].pwm_en   <= gpio_wdata[1];
              msg_cfg[gpio_addr[3]].shape    <= shape_e'(gpio_wdata[3:2]);
            end
            3'd1: msg_cfg[gpio_addr[3]].pwm_period <= gpio_wdata;
            3'd2: msg_cfg[gpio_addr[3]].pwm_high   <= gpio_wdata;
            3'd3: msg_cfg[gpio_addr[3]].ftw[31:0]  <= gpio_wdata;
            3'd6: msg_cfg[gpio_addr[3]].ftw[47:32] <= gpio_wdata[15:0];
            3'd4: msg_cfg[gpio_addr[3]].phase_off  <= gpio_wdata;
            3'd5: msg_cfg[gpio_addr[3]].amp        <= gpio_wdata[ADC_W-1:0];
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    gpio_rdata = '0;
    unique case (gpio_addr)
      REG_CTRL:   gpio_rdata = {30'd0, continuous, run};
      REG_N:      gpio_rdata = 32'(n_pts);
      REG_S:      gpio_rdata = 32'(s_rep);
      REG_R:      gpio_rdata = 32'(r_rep);
      REG_M:      gpio_rdata = 32'(m_len);
      REG_STATUS: gpio_rdata = 32'(status);
      default:    ;
    endcase
    for (int c = 0; c < 2; c++) begin
      if (gpio_addr == REG_AI_BASE + 8'(4*c) + 8'd0) gpio_rdata = 32'(ai_cfg[c].trig_sel);
      if (gpio_addr == REG_AI_BASE + 8'(4*c) + 8'd1) gpio_rdata = ai_cfg[c].delay_d;
      if (gpio_addr == REG_AI_BASE + 8'(4*c) + 8'd2) gpio_rdata = ai_cfg[c].width_w;
      if (gpio_addr == REG_AI_BASE + 8'(4*c) + 8'd3) gpio_rdata = 32'(ai_cfg[c].bias);
      if (gpio_addr == REG_MSG_BASE + 8'(8*c) + 8'd0)
        gpio_rdata = {28'd0, msg_cfg[c].shape, msg_cfg[c].pwm_en, msg_cfg[c].pwm_mode};
      if (gpio_addr == REG_MSG_BASE + 8'(8*c) + 8'd1) gpio_rdata = msg_cfg[c].pwm_period;
      if (gpio_addr == REG_MSG_BASE + 8'(8*c) + 8'd2) gpio_rdata = msg_cfg[c].pwm_high;
      if (gpio_addr == REG_MSG_BASE + 8'(8*c) + 8'd3) gpio_rdata = msg_cfg[c].ftw[31:0];
      if (gpio_addr == REG_MSG_BASE + 8'(8*c) + 8'd6) gpio_rdata = 32'(msg_cfg[c].ftw[47:32]);
      if (gpio_addr == REG_MSG_BASE + 8'(8*c) + 8'd4) gpio_rdata = msg_cfg[c].phase_off;
      if (gpio_addr == REG_MSG_BASE + 8'(8*c) + 8'd5) gpio_rdata = 32'(msg_cfg[c].amp);
    end
  end

endmodule
