// dig_io: digital output (marker) block driven by a tProcessor channel.
//
// Each payload released on its channel at its scheduled time sets the
// DOUT_W marker outputs to the low bits of the payload's first word; the
// levels are held until the next payload. A rising edge on output bit r also
// produces a one-clock trigger for readout r, which is how the tProcessor
// starts a readout window at an exact master clock time. The paper says a
// digital output channel carries markers for external equipment and that
// readouts are triggered by the tProcessor; which channel and which bits do
// this is this design's choice. Always ready.
// Timing: dout and ro_trig change in the clock after s_valid.
module dig_io
  import qick_pkg::*;
#(
  parameter int DOUT_W = 16,
  parameter int NRO    = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  payload_t          s_payload,
  output logic [DOUT_W-1:0] dout,
  output logic [NRO-1:0]    ro_trig
);
  logic [DOUT_W-1:0] nxt;
  assign nxt     = s_payload.r[0][DOUT_W-1:0];
  assign s_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dout    <= '0;
      ro_trig <= '0;
    end else if (s_valid) begin
      dout    <= nxt;
      ro_trig <= nxt[NRO-1:0] & ~dout[NRO-1:0];
    end else begin
      ro_trig <= '0;
    end
  end
endmodule
