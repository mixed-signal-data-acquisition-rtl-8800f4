// sample_fifo: synchronous first-word-fall-through FIFO.
//
// Caches the in-window ADC samples between the acquisition front end and the
// accumulator, and the finished packets of each channel ahead of the merge. The head
// word is always visible on 'dout' while 'empty' is low; 'pop' removes it. A push
// while full is dropped and sets the sticky 'overflow' flag; a pop while empty is
// ignored. Depth must be a power of two. Push and pop may happen in the same cycle.
// A pushed word is visible on dout the next cycle.
module sample_fifo #(
  parameter int unsigned W     = 15,
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic          empty,
  output logic          full,
  output logic          overflow
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;
  logic          do_push, do_pop;

  assign empty   = (wptr == rptr);
  assign full    = (wptr[AW] != rptr[AW]) && (wptr[AW-1:0] == rptr[AW-1:0]);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr[AW-1:0]] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push)         wptr     <= wptr + 1'b1;
      if (do_pop)          rptr     <= rptr + 1'b1;
      if (push && full)    overflow <= 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (1 << AW) == DEPTH) else $error("sample_fifo: DEPTH must be a power of two");

endmodule
