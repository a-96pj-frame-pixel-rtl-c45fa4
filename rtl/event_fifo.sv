// event_fifo: input queue in front of the RPU for event-mode events.
//
// The RPU needs two cycles per event (broadcast, then decide), while the AER
// interface can deliver an event every cycle. This first-in first-out queue
// absorbs short bursts: an event is pushed when push is high and the queue is
// not full, and popped when the RPU accepts it (pop). An event that arrives
// while the queue is full is refused (full is high) and counted as lost by the
// ESP. flush empties the queue; the ESP flushes it whenever the RPU is in frame
// mode, so that old events do not reach the next event-mode period.
//
// Interface: push/din in, full out; valid/dout/pop towards the RPU (show-ahead:
// dout is the oldest entry whenever valid is high). Timing: an event pushed in
// one cycle can be taken by the RPU in the next.
//
// The block diagram of the RPU's PE draws a queue on the slice/event input;
// its depth and its use for events only (slices come from the run-length
// encoder, which already waits on a ready signal) are this design's choices.
// rst_n also disables the handshake assertion, which lint reports as a
// synchronous use of the reset; it has no effect on the circuit.
module event_fifo #(
  parameter int unsigned WIDTH = 18,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  output logic             valid,
  output logic [WIDTH-1:0] dout,
  input  logic             pop
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd, wr;
  logic [PW:0]      count;
  logic             do_push, do_pop;

  assign full    = count == (PW+1)'(DEPTH);
  assign valid   = count != '0;
  assign dout    = mem[rd];
  assign do_push = push && !full;
  assign do_pop  = pop && valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd    <= '0;
      wr    <= '0;
      count <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (flush) begin
      rd    <= '0;
      wr    <= '0;
      count <= '0;
    end else begin
      if (do_push) begin
        mem[wr] <= din;
        wr      <= (wr == PW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      end
      if (do_pop) rd <= (rd == PW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  // a pop is only requested for an entry that is there
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> valid);

endmodule
