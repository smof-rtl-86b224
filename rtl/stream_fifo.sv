// stream_fifo: synchronous first-word-fall-through FIFO with valid/ready on
// both sides.
//
// These are the small buffers on both sides of an evicted connection (a burst
// or two deep), the beat buffer in front of a decoder and the shared dynamic
// weight buffer. Valid/ready FIFOs between stages are the usual glue of
// streaming CNN accelerators; the implementation details are this design's. Storage is a
// circular array with read and write pointers one bit wider than the address
// so that full and empty are told apart. A word written is visible at the
// output on the next cycle. Push and pop may happen in the same cycle, also
// when full (the pop frees the slot). `count` reports the occupancy.
// Depth must be a power of two.
module stream_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [W-1:0]             in_data,
  input  logic                     in_valid,
  output logic                     in_ready,
  output logic [W-1:0]             out_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;
  logic         push, pop;

  assign count     = wptr - rptr;
  assign out_valid = (count != 0);
  assign in_ready  = (count != (AW+1)'(DEPTH)) || out_ready;
  assign out_data  = mem[rptr[AW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  // A full FIFO only accepts when it is popped in the same cycle.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push && !pop |-> count < (AW+1)'(DEPTH));
endmodule
