// ro_ddc: digital downconversion and bypass switch of a readout chain.
//
// The ADC delivers LANES real samples per clock. Each is multiplied by an
// LANES-lane DDS whose phase is referred to master clock time 0, giving
// baseband I = x*cos and Q = -x*sin (mixing with exp(-j*phase)). The switch
// either passes that product (outsel = 0) or bypasses the downconversion and
// forwards the raw samples as I with Q = 0 (outsel = 1). The paper gives the
// multiply-by-parallel-DDS structure and the bypass switch; the sign
// convention, Q1.15 scaling and the bypass format are this design's choices.
//
// Timing: the ADC word presented in clock c is taken at master time t_now(c);
// its downconverted lanes appear on i_o/q_o three clocks later.
module ro_ddc
  import qick_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic               clk,
  input  time_t              t_now,
  input  logic [PHASE_W-1:0] freq,
  input  logic               outsel,
  input  sample_t            adc [LANES],
  output sample_t            i_o [LANES],
  output sample_t            q_o [LANES]
);
  sample_t dc [LANES], ds [LANES];
  dds_lanes #(.LANES(LANES)) u_dds (
    .clk, .t(t_now), .freq, .phase('0), .cos_o(dc), .sin_o(ds));

  sample_t x1 [LANES], x2 [LANES];
  logic    sel1, sel2;
  always_ff @(posedge clk) begin
    x1   <= adc;
    x2   <= x1;
    sel1 <= outsel;
    sel2 <= sel1;
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < LANES; k++) begin
      if (sel2) begin
        i_o[k] <= x2[k];
        q_o[k] <= '0;
      end else begin
        i_o[k] <= sat16((48'(x2[k]) * 48'(dc[k])) >>> 15);
        q_o[k] <= sat16(-((48'(x2[k]) * 48'(ds[k])) >>> 15));
      end
    end
  end
endmodule
