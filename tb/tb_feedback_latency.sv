// tb_feedback_latency: workload test of the feedback path at default sizes,
// set up like a latency measurement on the real system: a readout pulse is
// played on DAC 0, looped back into ADC 0 and integrated; the program waits
// for the result, branches on it and, if the branch is taken, plays a pulse on
// DAC 1 at once (time tag already passed).
//
// The bench measures, in fabric clocks:
//   decision = readout result valid -> the branch-dependent SET enters the
//              channel queue (WAITR, READ, CONDJ, SET),
//   pulse    = that SET handed to the generator -> first sample on DAC 1,
// and checks that the generator part is the 20-clock latency of the design,
// that the decision part is at most the 16 clocks measured on the reference
// firmware, and that a result below the threshold does not play the pulse.
// The shot is run twice: strong readout pulse (branch taken) and weak (not).
module tb_feedback_latency;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NSG = 7, NRO = 2, AW = 12, BAW = 10;

  logic rst_n, host_start, start_src, ext_start, running;
  time_t t_now;
  logic [11:0] pmem_addr, dmem_addr;
  logic pmem_we, dmem_we;
  logic [63:0] pmem_wdata, pmem_rdata;
  logic [31:0] dmem_wdata, dmem_rdata;
  logic [NSG-1:0] sg_cfg_we, sg_wr_valid;
  logic [AW+3:0] sg_cfg_addr;
  logic [31:0] sg_wr_data;
  sample_t dac_data [NSG][16];
  sample_t adc_data [NRO][8];
  logic [31:0] ro_cfg_freq [NRO];
  logic [NRO-1:0] ro_cfg_outsel, ro_cfg_clear;
  logic [15:0] ro_cfg_offset [NRO], ro_cfg_length [NRO];
  logic [BAW-1:0] ro_avg_rd_addr [NRO], ro_raw_rd_addr [NRO];
  logic [63:0] ro_avg_rd_data [NRO];
  logic [31:0] ro_raw_rd_data [NRO];
  logic [BAW:0] ro_avg_count [NRO], ro_raw_count [NRO];
  logic [15:0] dout;

  qick_top dut (.*);

  always_comb
    for (int r = 0; r < NRO; r++)
      for (int k = 0; k < 8; k++) adc_data[r][k] = dac_data[r][2*k];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] prog [$];
  task automatic build(int gain);
    prog = {};
    prog.push_back(i_regwi(1, 0));                                   // 0
    prog.push_back(i_regwi(2, 0));                                   // 1
    prog.push_back(i_regwi(3, 0));                                   // 2
    prog.push_back(i_regwi(4, gain));                                // 3
    prog.push_back(i_regwi(5, {12'd0, 1'b1, 1'b0, 2'd2, 16'd60}));   // 4 readout pulse
    prog.push_back(i_regwi(6, 1));                                   // 5
    prog.push_back(i_regwi(7, 0));                                   // 6
    prog.push_back(i_regwi(11, 100000));                             // 7 threshold
    prog.push_back(i_regwi(12, 16384));                              // 8 gain of the answer pulse
    prog.push_back(i_regwi(13, {12'd0, 1'b1, 1'b0, 2'd2, 16'd10}));  // 9 answer pulse
    prog.push_back(i_synci(100));                                    // 10
    prog.push_back(i_set(1, 1, 2, 3, 4, 5, 0));                      // 11
    prog.push_back(i_set(0, 6, 0, 0, 0, 0, 0));                      // 12
    prog.push_back(i_set(0, 7, 0, 0, 0, 0, 5));                      // 13
    prog.push_back(i_waitr(0));                                      // 14
    prog.push_back(i_read(10, 0, 0));                                // 15
    prog.push_back(i_condj(CND_GT, 10, 11, 18));                     // 16
    prog.push_back(i_end());                                         // 17
    prog.push_back(i_set(2, 1, 2, 3, 12, 13, 0));                    // 18 tag in the past: now
    prog.push_back(i_end());                                         // 19
  endtask

  // event times
  longint t_fb, t_push, t_hand, t_dac;
  always @(posedge clk) begin
    if (dut.fb_valid[0] && t_fb < 0) t_fb = longint'(t_now);
    if (dut.u_tproc.q_push[2] && t_push < 0) t_push = longint'(t_now);
    if (dut.ch_valid[2] && dut.ch_ready[2] && t_hand < 0) t_hand = longint'(t_now);
    if (dac_data[1][0] != 0 && t_dac < 0) t_dac = longint'(t_now);
  end

  task automatic shot(int gain, bit expect_taken);
    build(gain);
    foreach (prog[i]) begin
      @(negedge clk); pmem_we = 1; pmem_addr = 12'(i); pmem_wdata = prog[i];
    end
    @(negedge clk); pmem_we = 0;
    t_fb = -1; t_push = -1; t_hand = -1; t_dac = -1;
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0;
    wait (!running);
    repeat (60) @(negedge clk);
    chk(t_fb >= 0, "readout result produced");
    if (expect_taken) begin
      chk(t_push >= 0 && t_dac >= 0, "branch taken: answer pulse played");
      $display("feedback: result at %0d, SET queued at %0d (decision %0d clocks), handed to generator at %0d, DAC at %0d (generator %0d clocks), total %0d clocks",
               t_fb, t_push, t_push - t_fb, t_hand, t_dac, t_dac - t_hand, t_dac - t_fb);
      chk(t_dac - t_hand == SG_LATENCY, $sformatf("generator latency %0d", t_dac - t_hand));
      chk(t_push - t_fb <= 16, $sformatf("decision latency %0d", t_push - t_fb));
    end else begin
      chk(t_push < 0 && t_dac < 0, "branch not taken: no answer pulse");
    end
  endtask

  initial begin
    rst_n = 0; host_start = 0; start_src = 0; ext_start = 0;
    pmem_addr = 0; pmem_we = 0; pmem_wdata = 0;
    dmem_addr = 0; dmem_we = 0; dmem_wdata = 0;
    sg_cfg_we = 0; sg_cfg_addr = 0; sg_wr_valid = 0; sg_wr_data = 0;
    for (int r = 0; r < NRO; r++) begin
      ro_avg_rd_addr[r] = 0; ro_raw_rd_addr[r] = 0;
      ro_cfg_freq[r] = 0; ro_cfg_offset[r] = 30; ro_cfg_length[r] = 16;
    end
    ro_cfg_outsel = '1;
    ro_cfg_clear = '1;
    t_fb = -1; t_push = -1; t_hand = -1; t_dac = -1;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(negedge clk); ro_cfg_clear = '0;
    // flat envelope (16000) in words 0..63 of generators 0 and 1
    sg_cfg_we = 7'b11; sg_cfg_addr = '0;
    @(negedge clk); sg_cfg_we = '0;
    for (int n = 0; n < 64*16; n++) begin
      sg_wr_valid = 7'b11; sg_wr_data = {16'd0, 16'd16000};
      @(negedge clk);
    end
    sg_wr_valid = '0;
    shot(16384, 1);   // 16 x 8000 = 128000 > threshold
    shot(2000, 0);    // 16 x 976 = 15616 < threshold
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
