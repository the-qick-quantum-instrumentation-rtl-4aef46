// sg_gain: output gain stage of a signal generator.
//
// Multiplies every lane by the pulse's signed Q1.15 gain and saturates to 16
// bits; the paper says the switch output is multiplied by a gain before the
// DAC, the number format is this design's choice.
// Timing: registered, one clock from x/gain to y.
module sg_gain
  import qick_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic    clk,
  input  sample_t gain,
  input  sample_t x [LANES],
  output sample_t y [LANES]
);
  always_ff @(posedge clk) begin
    for (int k = 0; k < LANES; k++) begin
      y[k] <= sat16((48'(x[k]) * 48'(gain)) >>> 15);
    end
  end
endmodule
