// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used for the tProcessor's per-channel timed-instruction queues and for the
// signal generator's input queue. The paper says each channel has a queue and
// that the processor waits when a queue is full; the depth and the
// first-word-fall-through style are this design's choices.
//
// Interface: push/din write when !full; dout shows the oldest entry while
// !empty and pop removes it. A push and a pop may happen in the same clock.
// Timing: an entry pushed in clock n is visible on dout in clock n+1.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);

  T mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  assign dout  = mem[rd_ptr];
  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));

  // Handshake rules: never write a full queue or read an empty one.
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");
endmodule
