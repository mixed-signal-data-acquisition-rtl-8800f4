// cont_buffer: circular packet buffer of the continuous pattern.
//
// While idle the buffer writes every incoming packet at the next address, wrapping
// around its DEPTH entries, so it always holds the newest DEPTH packets. A read
// command freezes writing and streams out the newest M packets, oldest first, through
// a valid/ready port; out_last marks the M-th. Then cyclic writing resumes. If fewer
// than M packets were written since reset, only those are sent; M = 0 or M > DEPTH
// is limited to the packets held (a read command with nothing held sends nothing).
// Packets that arrive during a read-out are dropped and counted in 'dropped'; one that
// arrives in the same cycle as the read command is still written and is the newest
// packet of the read-out.
//
// The default DEPTH x PKT_W = 4096 x 128 bit is 64 KB, the published buffer size, and
// 4096 is also the published maximum of M; one packet per entry is this design's
// pairing of those two numbers. The array has a registered read port (block RAM).
//
// Timing: the first packet is valid two clocks after rd_cmd; after that one packet
// per clock while out_ready is high.
module cont_buffer #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned PKT_W = daq_pkg::PKT_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_valid,
  input  logic [PKT_W-1:0]  wr_data,
  input  logic              rd_cmd,
  input  logic [AW:0]       m_len,
  output logic [PKT_W-1:0]  out_data,
  output logic              out_valid,
  output logic              out_last,
  input  logic              out_ready,
  output logic              busy,
  output logic [31:0]       dropped
);

  logic [PKT_W-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      filled, filled_n, remaining, len;
  logic [AW-1:0]    wptr_n;
  logic             reading, issue, do_wr;

  // A packet written in the cycle of the read command belongs to the record: the
  // length and the start address are taken from the state after that write.
  assign do_wr    = wr_valid && !reading;
  assign wptr_n   = wptr + AW'(do_wr);
  assign filled_n = (do_wr && filled != (AW+1)'(DEPTH)) ? filled + 1'b1 : filled;
  assign len      = (m_len == '0 || m_len > filled_n) ? filled_n : m_len;
  assign issue    = reading && (remaining != '0) && (!out_valid || out_ready);
  assign busy  = reading;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
    if (issue) out_data <= mem[rptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      filled    <= '0;
      remaining <= '0;
      reading   <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      dropped   <= '0;
    end else begin
      wptr   <= wptr_n;
      filled <= filled_n;
      if (wr_valid && reading && dropped != '1) dropped <= dropped + 1'b1;

      if (!reading) begin
        if (rd_cmd && len != '0) begin
          reading   <= 1'b1;
          remaining <= len;
          rptr      <= wptr_n - len[AW-1:0];
        end
      end else begin
        if (issue) begin
          rptr      <= rptr + 1'b1;
          remaining <= remaining - 1'b1;
          out_valid <= 1'b1;
          out_last  <= (remaining == (AW+1)'(1));
        end else if (out_ready && out_valid) begin
          out_valid <= 1'b0;
          out_last  <= 1'b0;
          if (remaining == '0) reading <= 1'b0;
        end
      end
    end
  end

  // The output word must not change while it waits for out_ready.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold: assert property (p_hold);

endmodule
