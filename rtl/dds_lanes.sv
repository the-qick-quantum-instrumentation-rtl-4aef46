// dds_lanes: parallel direct digital synthesizer, LANES samples per clock.
//
// The DAC runs 16 times faster (ADC 8 times) than the fabric, so the tone for
// LANES consecutive samples is produced every clock. Rather than keeping a
// running phase accumulator, the phase of lane k is computed from the master
// clock each clock:
//     phase_k = phase + freq * (LANES * t + k)     (mod 2^32)
// which is the phase of a sine wave that has been running since master clock
// time 0. This gives the phase coherence the paper asks for: two pulses of the
// same frequency, whenever played, lie on the same continuous sine. 32-bit
// phase resolution and the lane counts are the paper's; computing the phase
// from t, the 1024-entry 16-bit sine table and the phase truncation are this
// design's choices.
//
// Interface: t, freq and phase are sampled every clock; cos_o/sin_o (Q1.15)
// appear two clocks later.
//
// Lint notes: only the low 32 bits of t are used, because the phase is taken
// modulo 2^32 and LANES is a power of two; only the top 10 bits of each lane
// phase address the sine table (truncation, no interpolation), so the lower
// phase bits are unused by design.
module dds_lanes
  import qick_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic               clk,
  input  time_t              t,
  input  logic [PHASE_W-1:0] freq,
  input  logic [PHASE_W-1:0] phase,
  output sample_t            cos_o [LANES],
  output sample_t            sin_o [LANES]
);
  localparam int LSH = $clog2(LANES);

  // Stage 1: phase of lane 0.
  logic [PHASE_W-1:0] base, f1;
  logic [PHASE_W-1:0] tl;
  assign tl = PHASE_W'(t) << LSH;   // only t mod 2^32 matters for the product
  always_ff @(posedge clk) begin
    base <= phase + freq * tl;
    f1   <= freq;
  end

  // Stage 2: per-lane phase and table lookup (cos = sin + quarter period).
  always_ff @(posedge clk) begin
    for (int k = 0; k < LANES; k++) begin
      logic [PHASE_W-1:0] ph;
      logic [LUT_AW-1:0]  idx;
      ph  = base + f1 * PHASE_W'(k);
      idx = ph[PHASE_W-1 -: LUT_AW];
      sin_o[k] <= SIN_LUT[idx];
      cos_o[k] <= SIN_LUT[idx + LUT_AW'(LUT_N / 4)];
    end
  end
endmodule
