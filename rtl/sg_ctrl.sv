// sg_ctrl: pulse sequencer of a signal generator.
//
// Takes pulse commands from the generator's queue and, one clock at a time,
// issues the table address and the DDS / switch / gain settings of the pulse.
// When a pulse ends the next queued command starts in the very next clock, so
// back-to-back pulses have no gap. Behaviour after a pulse follows the paper:
//   mode = 0  one shot: the pulse is played once;
//   mode = 1  periodic: the pulse restarts until a new command is queued;
//   stdsel    tells the output stage what to show while idle
//             (0 = repeat the last sample, 1 = zero).
// Pulse length (nsamp) counts fabric clocks of LANES samples and addr counts
// table words; those units, and treating nsamp = 0 as one clock, are this
// design's choices.
//
// Timing: q_pop is combinational; play/addr/... are registered and describe
// the table word to read in the following clock.
module sg_ctrl
  import qick_pkg::*;
#(
  parameter int AW = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               q_empty,
  input  payload_t           q_head,
  output logic               q_pop,
  output logic               play,
  output logic [AW-1:0]      addr,
  output logic [PHASE_W-1:0] freq,
  output logic [PHASE_W-1:0] phase,
  output logic [1:0]         outsel,
  output sample_t            gain,
  output logic               stdsel
);
  sg_cmd_t    cur, nxt;
  logic [15:0] left;      // clocks still to play after this one
  logic        last;      // current clock is the pulse's last (or idle)

  assign nxt   = decode_sg(q_head);
  assign last  = !play || (left == '0);
  assign q_pop = last && !q_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      play <= 1'b0;
      cur  <= '0;
      left <= '0;
      addr <= '0;
    end else if (q_pop) begin
      play <= 1'b1;
      cur  <= nxt;
      addr <= AW'(nxt.addr);
      left <= (nxt.nsamp == '0) ? '0 : nxt.nsamp - 1'b1;
    end else if (last) begin
      if (play && cur.mode) begin         // periodic: start over
        addr <= AW'(cur.addr);
        left <= (cur.nsamp == '0) ? '0 : cur.nsamp - 1'b1;
      end else begin
        play <= 1'b0;
      end
    end else begin
      addr <= addr + 1'b1;
      left <= left - 1'b1;
    end
  end

  assign freq   = cur.freq;
  assign phase  = cur.phase;
  assign outsel = cur.outsel;
  assign gain   = cur.gain;
  assign stdsel = cur.stdsel;
endmodule
