// qick_top: QICK firmware, programmable-logic side.
//
// One timed processor drives eight timed output channels: channel 0 feeds the
// digital I/O (marker) block, channels 1..7 feed seven signal generators, one
// per DAC. Two readout chains, one per ADC, are triggered by marker bits 0
// and 1 and return their averaged IQ pairs to the processor's readout ports
// for feedback. The processor's 48-bit master clock is the common time
// reference of every generator DDS and readout DDS. The program memory sits
// beside the processor. Everything runs in one fabric clock domain; a DAC gets
// 16 samples and an ADC gives 8 samples per clock.
//
// The host-side ports (program and data memory, envelope upload, readout
// configuration and buffer reads, start control) stand in for the AXI and DMA
// paths from the ARM processing system; the DAC and ADC sample ports connect
// to the RFSoC data converters. Neither the processing system, the DMA
// engines nor the converters are part of this RTL.
//
// From the paper's firmware diagram: tProcessor, signal generators, readouts
// and the I/O block and how they connect. This design's own: seven generators
// with channel 0 for I/O (eight channels in all, as the processor has), the
// trigger wiring, and the host port layout.
module qick_top
  import qick_pkg::*;
#(
  parameter int NSG     = NCH - 1,
  parameter int NRO     = 2,
  parameter int PMEM_AW = 12,
  parameter int DMEM_AW = 12,
  parameter int SG_AW   = 12,
  parameter int BUF_AW  = 10,
  parameter int DOUT_W  = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // start control
  input  logic                          host_start,
  input  logic                          start_src,
  input  logic                          ext_start,
  output logic                          running,
  output time_t                         t_now,
  // program memory, host port
  input  logic [PMEM_AW-1:0]            pmem_addr,
  input  logic                          pmem_we,
  input  logic [INSTR_W-1:0]            pmem_wdata,
  output logic [INSTR_W-1:0]            pmem_rdata,
  // data memory, host port
  input  logic [DMEM_AW-1:0]            dmem_addr,
  input  logic                          dmem_we,
  input  logic [REG_W-1:0]              dmem_wdata,
  output logic [REG_W-1:0]              dmem_rdata,
  // envelope upload
  input  logic [NSG-1:0]                sg_cfg_we,
  input  logic [SG_AW+$clog2(SG_LANES)-1:0] sg_cfg_addr,
  input  logic [NSG-1:0]                sg_wr_valid,
  input  logic [2*SAMPLE_W-1:0]         sg_wr_data,
  // DACs
  output sample_t                       dac_data [NSG][SG_LANES],
  // ADCs
  input  sample_t                       adc_data [NRO][RO_LANES],
  // readout configuration
  input  logic [PHASE_W-1:0]            ro_cfg_freq   [NRO],
  input  logic [NRO-1:0]                ro_cfg_outsel,
  input  logic [15:0]                   ro_cfg_offset [NRO],
  input  logic [15:0]                   ro_cfg_length [NRO],
  input  logic [NRO-1:0]                ro_cfg_clear,
  // readout buffers, host port
  input  logic [BUF_AW-1:0]             ro_avg_rd_addr [NRO],
  output logic [63:0]                   ro_avg_rd_data [NRO],
  output logic [BUF_AW:0]               ro_avg_count   [NRO],
  input  logic [BUF_AW-1:0]             ro_raw_rd_addr [NRO],
  output logic [31:0]                   ro_raw_rd_data [NRO],
  output logic [BUF_AW:0]               ro_raw_count   [NRO],
  // digital outputs
  output logic [DOUT_W-1:0]             dout
);
  if (NSG + 1 > NCH) begin : g_bad
    $error("qick_top: at most NCH-1 signal generators");
  end

  // ------------------------------------------------------------ program memory
  logic [PMEM_AW-1:0] tp_pmem_addr;
  logic [INSTR_W-1:0] tp_pmem_data;
  tproc_mem #(.DW(INSTR_W), .AW(PMEM_AW)) u_pmem (
    .clk,
    .a_addr(tp_pmem_addr), .a_we(1'b0), .a_wdata('0), .a_rdata(tp_pmem_data),
    .b_addr(pmem_addr), .b_we(pmem_we), .b_wdata(pmem_wdata), .b_rdata(pmem_rdata));

  // ------------------------------------------------------------ tProcessor
  logic [NCH-1:0] ch_valid, ch_ready;
  payload_t       ch_payload [NCH];
  logic [NRO-1:0] fb_valid;
  reg_t           fb_i [NRO], fb_q [NRO];

  tproc #(.N_CH(NCH), .NRO(NRO), .PMEM_AW(PMEM_AW), .DMEM_AW(DMEM_AW)) u_tproc (
    .clk, .rst_n, .host_start, .start_src, .ext_start, .running,
    .pmem_addr(tp_pmem_addr), .pmem_data(tp_pmem_data),
    .dmem_host_addr(dmem_addr), .dmem_host_we(dmem_we),
    .dmem_host_wdata(dmem_wdata), .dmem_host_rdata(dmem_rdata),
    .ro_valid(fb_valid), .ro_i(fb_i), .ro_q(fb_q),
    .ch_valid, .ch_ready, .ch_payload, .t_now);

  // ------------------------------------------------------------ digital I/O
  logic [NRO-1:0] ro_trig;
  dig_io #(.DOUT_W(DOUT_W), .NRO(NRO)) u_io (
    .clk, .rst_n, .s_valid(ch_valid[0]), .s_ready(ch_ready[0]), .s_payload(ch_payload[0]),
    .dout, .ro_trig);

  // ------------------------------------------------------------ signal generators
  for (genvar g = 0; g < NSG; g++) begin : g_sg
    sig_gen #(.LANES(SG_LANES), .AW(SG_AW)) u_sg (
      .clk, .rst_n, .t_now,
      .s_valid(ch_valid[g+1]), .s_ready(ch_ready[g+1]), .s_payload(ch_payload[g+1]),
      .wr_cfg_we(sg_cfg_we[g]), .wr_cfg_addr(sg_cfg_addr),
      .wr_valid(sg_wr_valid[g]), .wr_data(sg_wr_data),
      .dac_data(dac_data[g]));
  end
  for (genvar c = NSG + 1; c < NCH; c++) begin : g_unused_ch
    assign ch_ready[c] = 1'b1;
  end

  // ------------------------------------------------------------ readouts
  for (genvar r = 0; r < NRO; r++) begin : g_ro
    readout #(.LANES(RO_LANES), .DECIM(RO_DECIM), .BUF_AW(BUF_AW)) u_ro (
      .clk, .rst_n, .t_now, .adc(adc_data[r]), .trig(ro_trig[r]),
      .cfg_freq(ro_cfg_freq[r]), .cfg_outsel(ro_cfg_outsel[r]),
      .cfg_offset(ro_cfg_offset[r]), .cfg_length(ro_cfg_length[r]),
      .cfg_clear(ro_cfg_clear[r]),
      .fb_valid(fb_valid[r]), .fb_i(fb_i[r]), .fb_q(fb_q[r]),
      .avg_rd_addr(ro_avg_rd_addr[r]), .avg_rd_data(ro_avg_rd_data[r]),
      .avg_count(ro_avg_count[r]),
      .raw_rd_addr(ro_raw_rd_addr[r]), .raw_rd_data(ro_raw_rd_data[r]),
      .raw_count(ro_raw_count[r]));
  end
endmodule
