// ro_fir: low-pass FIR filter on a parallel complex sample stream.
//
// The stream carries LANES consecutive samples per clock (lane 0 oldest).
// For every sample n the filter computes
//     y[n] = (sum_{j=0}^{NTAP-1} COEF[j] * x[n-j]) >>> SHIFT
// using the current clock's lanes and the previous clock's lanes for the
// history, separately on I and Q, saturated to 16 bits. The paper says the
// downconverted signal is low-pass filtered and that the filter can be
// tailored per experiment, but gives no coefficients: the default is an
// 8-tap moving average (all ones, >>> 3). NTAP may be at most LANES+1.
// Timing: registered, one clock from input to output.
module ro_fir
  import qick_pkg::*;
#(
  parameter int LANES = 8,
  parameter int NTAP  = 8,
  parameter int SHIFT = 3,
  parameter logic signed [15:0] COEF [NTAP] = '{default: 16'sd1}
) (
  input  logic    clk,
  input  sample_t i_i [LANES],
  input  sample_t q_i [LANES],
  output sample_t i_o [LANES],
  output sample_t q_o [LANES]
);
  sample_t pi [LANES], pq [LANES];   // previous clock's samples

  always_ff @(posedge clk) begin
    pi <= i_i;
    pq <= q_i;
    for (int k = 0; k < LANES; k++) begin
      logic signed [47:0] ai, aq;
      ai = '0;
      aq = '0;
      for (int j = 0; j < NTAP; j++) begin
        if (k - j >= 0) begin
          ai += 48'(COEF[j]) * 48'(i_i[k-j]);
          aq += 48'(COEF[j]) * 48'(q_i[k-j]);
        end else begin
          ai += 48'(COEF[j]) * 48'(pi[LANES+k-j]);
          aq += 48'(COEF[j]) * 48'(pq[LANES+k-j]);
        end
      end
      i_o[k] <= sat16(ai >>> SHIFT);
      q_o[k] <= sat16(aq >>> SHIFT);
    end
  end
endmodule
