// sg_mix_switch: digital upconversion and output switch of a signal generator.
//
// For every lane the envelope (I + jQ) is multiplied by the DDS tone
// (cos + j sin); the DAC takes real samples, so the real part I*cos - Q*sin
// is kept. The switch then selects, per the paper's outsel field:
//   0 = envelope times tone, 1 = tone only (cos), 2 = envelope only (I),
//   3 = zero.
// The Q1.15 scaling (product >>> 15, saturated to 16 bits) is this design's
// choice. Timing: registered, one clock from inputs to y.
module sg_mix_switch
  import qick_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic       clk,
  input  logic [1:0] outsel,
  input  sample_t    env_i [LANES],
  input  sample_t    env_q [LANES],
  input  sample_t    cos_i [LANES],
  input  sample_t    sin_i [LANES],
  output sample_t    y     [LANES]
);
  always_ff @(posedge clk) begin
    for (int k = 0; k < LANES; k++) begin
      logic signed [47:0] m;
      m = (48'(env_i[k]) * 48'(cos_i[k]) - 48'(env_q[k]) * 48'(sin_i[k])) >>> 15;
      unique case (outsel)
        2'd0: y[k] <= sat16(m);
        2'd1: y[k] <= cos_i[k];
        2'd2: y[k] <= env_i[k];
        default: y[k] <= '0;
      endcase
    end
  end
endmodule
