// sync_fifo: synchronous first-in first-out buffer.
//
// Used as the host event queue of the NIC (completion, error and
// flow-control events) and as the task and in-flight queues inside other
// blocks. Storage is a register array of DEPTH words of WIDTH bits with
// read and write pointers one bit wider than the index, so full and empty
// are told apart without a counter.
//
// Interface: push writes din when not full; pop removes the oldest word
// when not empty; dout always shows the oldest word (first-word
// fall-through). A push into a full FIFO is ignored and counted in
// overflows. Push and pop in the same cycle are both served. Depth and
// width are this design's choice; the paper only says that errors and
// completions "raise an event in the event queue".
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH):0] count,
  output logic [15:0]      overflows
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_push, do_pop;

  assign empty   = (wptr == rptr);
  assign full    = (wptr[AW-1:0] == rptr[AW-1:0]) && (wptr[AW] != rptr[AW]);
  assign count   = $bits(count)'(wptr - rptr);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      overflows <= '0;
    end else begin
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
      if (push && full) overflows <= overflows + 1'b1;
    end
  end

  // DEPTH must be a power of two for the pointer arithmetic above.
  initial assert ((1 << AW) == DEPTH) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
