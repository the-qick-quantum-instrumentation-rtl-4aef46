// readout: one ADC's readout chain.
//
// ADC samples (8 per clock) are downconverted by a parallel DDS or passed raw
// (ro_ddc), low-pass filtered (ro_fir) and decimated by 8 (ro_decim), leaving
// one complex sample per clock. A trigger from the tProcessor opens a window
// (ro_average): after `offset` samples, `length` samples are summed. The sums
// go to the averaged-result circular buffer, and at the same time out on the
// feedback stream (fb_valid for one clock) to a tProcessor input port so a
// program can branch on them. The samples inside the window also go to the
// raw buffer. The host reads both buffers.
//
// This chain, the bypass switch, the factor 8, the two buffers and the
// feedback output follow the paper; the filter taps, buffer depths and the
// 32-bit sums are this design's choices.
//
// Timing: the ADC word of clock c reaches the average block 5 clocks later
// (DDC 3, FIR 1, decimator 1). fb_valid rises one clock after the last summed
// sample.
module readout
  import qick_pkg::*;
#(
  parameter int LANES  = 8,
  parameter int DECIM  = 8,
  parameter int BUF_AW = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  time_t              t_now,
  input  sample_t            adc [LANES],
  input  logic               trig,
  // configuration
  input  logic [PHASE_W-1:0] cfg_freq,
  input  logic               cfg_outsel,
  input  logic [15:0]        cfg_offset,
  input  logic [15:0]        cfg_length,
  input  logic               cfg_clear,
  // feedback to the tProcessor
  output logic               fb_valid,
  output logic [REG_W-1:0]   fb_i,
  output logic [REG_W-1:0]   fb_q,
  // host buffer access
  input  logic [BUF_AW-1:0]  avg_rd_addr,
  output logic [63:0]        avg_rd_data,
  output logic [BUF_AW:0]    avg_count,
  input  logic [BUF_AW-1:0]  raw_rd_addr,
  output logic [31:0]        raw_rd_data,
  output logic [BUF_AW:0]    raw_count
);
  localparam int NOUT = LANES / DECIM;

  sample_t d_i [LANES], d_q [LANES];
  ro_ddc #(.LANES(LANES)) u_ddc (
    .clk, .t_now, .freq(cfg_freq), .outsel(cfg_outsel), .adc, .i_o(d_i), .q_o(d_q));

  sample_t f_i [LANES], f_q [LANES];
  ro_fir #(.LANES(LANES)) u_fir (.clk, .i_i(d_i), .q_i(d_q), .i_o(f_i), .q_o(f_q));

  sample_t x_i [NOUT], x_q [NOUT];
  ro_decim #(.LANES(LANES), .DECIM(DECIM)) u_dec (
    .clk, .i_i(f_i), .q_i(f_q), .i_o(x_i), .q_o(x_q));

  logic cap_valid, sum_valid, busy;
  logic signed [REG_W-1:0] sum_i, sum_q;
  ro_average #(.ACC_W(REG_W)) u_avg (
    .clk, .rst_n, .trig, .offset(cfg_offset), .length(cfg_length),
    .in_i(x_i[NOUT-1]), .in_q(x_q[NOUT-1]),
    .cap_valid, .sum_valid, .sum_i, .sum_q, .busy);

  ro_buffer #(.DW(64), .AW(BUF_AW)) u_avg_buf (
    .clk, .rst_n, .clear(cfg_clear), .wr_valid(sum_valid), .wr_data({sum_q, sum_i}),
    .rd_addr(avg_rd_addr), .rd_data(avg_rd_data), .count(avg_count));

  ro_buffer #(.DW(32), .AW(BUF_AW)) u_raw_buf (
    .clk, .rst_n, .clear(cfg_clear), .wr_valid(cap_valid),
    .wr_data({x_q[NOUT-1], x_i[NOUT-1]}),
    .rd_addr(raw_rd_addr), .rd_data(raw_rd_data), .count(raw_count));

  assign fb_valid = sum_valid;
  assign fb_i     = sum_i;
  assign fb_q     = sum_q;

  // Samples are captured only inside an open window.
  assert property (@(posedge clk) disable iff (!rst_n) cap_valid |-> busy)
    else $error("readout: capture outside a window");
endmodule
