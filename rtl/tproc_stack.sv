// tproc_stack: last-in first-out stack of the tProcessor.
//
// Holds register values saved by PUSH and restored by POP. The paper only
// names the stack; its use for register values and its depth are this
// design's choices. dout shows the top entry combinationally; push and pop in
// the same clock replace the top. A push when full or a pop when empty is
// ignored and flagged by an assertion.
module tproc_stack #(
  parameter int DEPTH = 8,
  parameter int W     = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty
);
  localparam int PW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [PW-1:0] sp;   // number of entries
  logic [AW-1:0] top, nxt;
  assign top = AW'(sp - 1'b1);
  assign nxt = AW'(sp);

  assign empty = (sp == '0);
  assign full  = (sp == PW'(DEPTH));
  assign dout  = empty ? '0 : mem[top];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sp <= '0;
    end else if (push && pop && !empty) begin
      mem[top] <= din;
    end else if (push && !full) begin
      mem[nxt] <= din;
      sp      <= sp + 1'b1;
    end else if (pop && !empty) begin
      sp <= sp - 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && full))
    else $error("tproc_stack: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && !push && empty))
    else $error("tproc_stack: pop while empty");
endmodule
