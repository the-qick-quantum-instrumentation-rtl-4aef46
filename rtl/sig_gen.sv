// sig_gen: signal generator, one per DAC.
//
// Plays pulses that the tProcessor releases at their scheduled time. A pulse
// command (five 32-bit words, see qick_pkg::sg_cmd_t) gives the envelope start
// address and length, DDS frequency and phase, output select, gain, mode and
// stdsel. Each clock the generator reads one table word of 16 complex
// envelope samples, multiplies it by 16 lanes of a DDS tone whose phase is
// referred to master clock time 0 (phase coherence), selects the output with
// outsel, scales by the gain and hands 16 real samples to the DAC.
//
// Datapath: input queue -> sg_ctrl -> pad delay -> table memory and DDS ->
// sg_mix_switch -> sg_gain -> idle hold/zero. The generator is always ready
// unless its queue is full. The pad delay makes the paper's 20-clock latency
// exact: a command accepted in clock P into an empty, idle generator shows its
// first samples on dac_data in clock P+20. While idle the output is the
// pulse's last sample on every lane (stdsel = 0) or zero (stdsel = 1); after
// reset it is zero.
//
// From the paper: table + DDS + complex multiply + switch + gain, 16 lanes,
// 16-bit I/Q, 32-bit DDS, outsel/mode/stdsel meanings, 20-clock latency,
// phase referred to the master clock. This design's own: queue depth, the
// payload layout, the pad register placement and number formats.
module sig_gen
  import qick_pkg::*;
#(
  parameter int LANES  = 16,
  parameter int AW     = 12,
  parameter int QDEPTH = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  time_t                       t_now,
  // commands from the tProcessor (valid/ready stream)
  input  logic                        s_valid,
  output logic                        s_ready,
  input  payload_t                    s_payload,
  // envelope upload from the host
  input  logic                        wr_cfg_we,
  input  logic [AW+$clog2(LANES)-1:0] wr_cfg_addr,
  input  logic                        wr_valid,
  input  logic [2*SAMPLE_W-1:0]       wr_data,
  // DAC samples, lane 0 first in time
  output sample_t                     dac_data [LANES]
);
  // Clocks from s_valid&s_ready to sg_ctrl's registered outputs (2) plus
  // table/DDS (2), switch (1) and gain (1).
  localparam int CORE_LAT = 6;
  localparam int PAD      = SG_LATENCY - CORE_LAT;
  localparam int BACK_LAT = 4;   // ctrl stage (after pad) to dac_data

  // ------------------------------------------------------------ queue
  logic     q_full, q_empty, q_pop;
  logic [$clog2(QDEPTH+1)-1:0] q_count;
  payload_t q_head;
  assign s_ready = !q_full;
  sync_fifo #(.T(payload_t), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .push(s_valid && s_ready), .din(s_payload), .pop(q_pop),
    .dout(q_head), .full(q_full), .empty(q_empty), .count(q_count));

  // ------------------------------------------------------------ control
  typedef struct packed {
    logic               play;
    logic [AW-1:0]      addr;
    logic [PHASE_W-1:0] freq;
    logic [PHASE_W-1:0] phase;
    logic [1:0]         outsel;
    sample_t            gain;
    logic               stdsel;
  } ctl_t;

  ctl_t c0;
  sg_ctrl #(.AW(AW)) u_ctrl (
    .clk, .rst_n, .q_empty, .q_head, .q_pop,
    .play(c0.play), .addr(c0.addr), .freq(c0.freq), .phase(c0.phase),
    .outsel(c0.outsel), .gain(c0.gain), .stdsel(c0.stdsel));

  // Pad delay line.
  ctl_t pad [PAD+1];
  assign pad[0] = c0;
  for (genvar i = 1; i <= PAD; i++) begin : g_pad
    always_ff @(posedge clk) begin
      if (!rst_n) pad[i] <= '0;
      else        pad[i] <= pad[i-1];
    end
  end
  ctl_t c;
  assign c = pad[PAD];

  // ------------------------------------------------------------ table + writer
  logic                     mw_we;
  logic [AW-1:0]            mw_addr;
  logic [$clog2(LANES)-1:0] mw_lane;
  logic [2*SAMPLE_W-1:0]    mw_data;
  sg_data_writer #(.LANES(LANES), .AW(AW)) u_wr (
    .clk, .rst_n, .cfg_we(wr_cfg_we), .cfg_addr(wr_cfg_addr),
    .s_valid(wr_valid), .s_data(wr_data),
    .mem_we(mw_we), .mem_addr(mw_addr), .mem_lane(mw_lane), .mem_data(mw_data));

  sample_t tb_i [LANES], tb_q [LANES];
  sg_table_mem #(.LANES(LANES), .AW(AW)) u_tbl (
    .clk, .wr_en(mw_we), .wr_addr(mw_addr), .wr_lane(mw_lane), .wr_data(mw_data),
    .rd_addr(c.addr), .rd_i(tb_i), .rd_q(tb_q));

  // Second register so the envelope lines up with the two-clock DDS.
  sample_t env_i [LANES], env_q [LANES];
  always_ff @(posedge clk) begin
    env_i <= tb_i;
    env_q <= tb_q;
  end

  // ------------------------------------------------------------ DDS
  // Phase is that of the sample leaving the generator BACK_LAT clocks later.
  sample_t dds_c [LANES], dds_s [LANES];
  dds_lanes #(.LANES(LANES)) u_dds (
    .clk, .t(t_now + time_t'(BACK_LAT)), .freq(c.freq), .phase(c.phase),
    .cos_o(dds_c), .sin_o(dds_s));

  // ------------------------------------------------------------ control delays
  logic [1:0] outsel_d [2];
  sample_t    gain_d   [3];
  logic       play_d   [BACK_LAT];
  logic       stdsel_d [BACK_LAT];
  always_ff @(posedge clk) begin
    outsel_d[0] <= c.outsel;
    outsel_d[1] <= outsel_d[0];
    gain_d[0]   <= c.gain;
    gain_d[1]   <= gain_d[0];
    gain_d[2]   <= gain_d[1];
    if (!rst_n) begin
      for (int i = 0; i < BACK_LAT; i++) begin
        play_d[i]   <= 1'b0;
        stdsel_d[i] <= 1'b1;
      end
    end else begin
      play_d[0]   <= c.play;
      stdsel_d[0] <= c.stdsel;
      for (int i = 1; i < BACK_LAT; i++) begin
        play_d[i]   <= play_d[i-1];
        stdsel_d[i] <= stdsel_d[i-1];
      end
    end
  end

  // ------------------------------------------------------------ switch + gain
  sample_t sw_y [LANES], g_y [LANES];
  sg_mix_switch #(.LANES(LANES)) u_sw (
    .clk, .outsel(outsel_d[1]), .env_i, .env_q, .cos_i(dds_c), .sin_i(dds_s), .y(sw_y));
  sg_gain #(.LANES(LANES)) u_gain (.clk, .gain(gain_d[2]), .x(sw_y), .y(g_y));

  // ------------------------------------------------------------ idle output
  sample_t last_s;
  logic    last_zero;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_s    <= '0;
      last_zero <= 1'b1;
    end else if (play_d[BACK_LAT-1]) begin
      last_s    <= g_y[LANES-1];
      last_zero <= stdsel_d[BACK_LAT-1];
    end
  end

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      if (play_d[BACK_LAT-1]) dac_data[k] = g_y[k];
      else                    dac_data[k] = last_zero ? '0 : last_s;
    end
  end
  assert property (@(posedge clk) disable iff (!rst_n) 32'(q_count) <= QDEPTH)
    else $error("sig_gen: queue overflow");
endmodule
