// ro_decim: decimation of a parallel sample stream by DECIM.
//
// Keeps every DECIM-th sample (the last of each group) of a stream that
// carries LANES samples per clock, so LANES/DECIM samples leave per clock.
// The factor 8 is the paper's; with the paper's 8 ADC lanes exactly one
// complex sample per clock leaves. LANES must be a multiple of DECIM.
// Timing: registered, one clock from input to output.
module ro_decim
  import qick_pkg::*;
#(
  parameter int LANES = 8,
  parameter int DECIM = 8
) (
  input  logic    clk,
  input  sample_t i_i [LANES],
  input  sample_t q_i [LANES],
  output sample_t i_o [LANES/DECIM],
  output sample_t q_o [LANES/DECIM]
);
  if (LANES % DECIM != 0) begin : g_bad
    $error("ro_decim: LANES must be a multiple of DECIM");
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < LANES/DECIM; m++) begin
      i_o[m] <= i_i[m*DECIM + DECIM - 1];
      q_o[m] <= q_i[m*DECIM + DECIM - 1];
    end
  end
endmodule
