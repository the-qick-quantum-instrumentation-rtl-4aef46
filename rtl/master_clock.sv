// master_clock: the tProcessor's 48-bit time base.
//
// A counter that every timed instruction, signal generator phase and readout
// refers to. The 48-bit width is the paper's (at 384 MHz it wraps after about
// 8.5 days). It is cleared when a program starts and counts while en is 1;
// clear has priority. Timing: t changes one clock after clear/en.
module master_clock #(
  parameter int W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  output logic [W-1:0] t
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear) t <= '0;
    else if (en)         t <= t + 1'b1;
  end
endmodule
