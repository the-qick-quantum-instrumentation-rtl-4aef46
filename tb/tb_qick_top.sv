// tb_qick_top: end-to-end test of the complete firmware at its default sizes
// (seven signal generators, two readouts, 4096-word memories).
//
// The bench plays the host and the analog loop. It loads envelopes into the
// generators' tables and a program into the processor, configures the two
// readouts and starts the program. DAC 0 is looped back to ADC 0 and DAC 1 to
// ADC 1 (ADC lane k takes DAC lane 2k, i.e. the ADC samples at half the DAC
// rate). The program:
//   - plays a flat pulse on generator 0 and raises marker bit 0 at the same
//     time tag, which triggers readout 0 (downconversion bypassed);
//   - waits for the readout result, reads it and branches on it, twice, once
//     with a strong and once with a weak pulse (feedback);
//   - plays a DDS tone on generator 1 and triggers readout 1, which
//     downconverts it at the matching frequency (phase coherence makes I large
//     and Q small);
//   - starts a periodic pulse on generator 2 and replaces it by a one-shot
//     that holds its last sample;
//   - issues 20 timed pulses to generator 3, more than its queue holds, so the
//     processor stalls;
//   - plays a mixed (envelope times carrier) pulse on generator 4;
//   - waits with WAITI and ends.
// Each mechanism is counted; one that never happens counts as a failure. The
// readout sums are checked exactly against the DAC samples seen by the bench,
// the feedback branch results through the data memory, and both readout
// buffers through the host ports.
module tb_qick_top;
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

  // analog loopback: ADC r lane k <- DAC r lane 2k
  always_comb
    for (int r = 0; r < NRO; r++)
      for (int k = 0; k < 8; k++) adc_data[r][k] = dac_data[r][2*k];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- program
  localparam logic [31:0] F_DDS = 32'h0040_0000;   // 1/1024 cycle per sample
  function automatic logic [31:0] re_word(int nsamp, int outsel, bit mode, bit stdsel);
    return {12'd0, stdsel, mode, 2'(outsel), 16'(nsamp)};
  endfunction

  logic [63:0] prog [$];
  task automatic build();
    prog = {};
    // registers: r1 freq, r2 phase, r3 addr, r4 gain, r5 re-word
    prog.push_back(i_regwi(1, 0));                                   // 0
    prog.push_back(i_regwi(2, 0));                                   // 1
    prog.push_back(i_regwi(3, 0));                                   // 2
    prog.push_back(i_regwi(4, 16384));                               // 3 gain 0.5
    prog.push_back(i_regwi(5, re_word(100, 2, 0, 1)));               // 4 envelope, zero after
    prog.push_back(i_regwi(6, 1));                                   // 5 marker bit 0
    prog.push_back(i_regwi(7, 0));                                   // 6 markers low
    prog.push_back(i_regwi(8, 2));                                   // 7 marker bit 1
    prog.push_back(i_regwi(11, 100000));                             // 8 threshold
    prog.push_back(i_regwi(12, 1));                                  // 9 two shots
    // shot loop
    prog.push_back(i_synci(300));                                    // 10
    prog.push_back(i_set(1, 1, 2, 3, 4, 5, 0));                      // 11 pulse on SG0
    prog.push_back(i_set(0, 6, 0, 0, 0, 0, 0));                      // 12 trigger readout 0
    prog.push_back(i_set(0, 7, 0, 0, 0, 0, 10));                     // 13 marker low
    prog.push_back(i_waitr(0));                                      // 14
    prog.push_back(i_read(10, 0, 0));                                // 15
    prog.push_back(i_condj(CND_GT, 10, 11, 20));                     // 16
    prog.push_back(i_memw(0, 10, 1));                                // 17 low result
    prog.push_back(i_mathi(ALU_ADD, 20, 20, 1));                     // 18
    prog.push_back(i_jump(22));                                      // 19
    prog.push_back(i_memw(0, 10, 0));                                // 20 high result
    prog.push_back(i_mathi(ALU_ADD, 21, 21, 1));                     // 21
    prog.push_back(i_regwi(4, 2000));                                // 22 weak pulse next
    prog.push_back(i_loopnz(12, 10));                                // 23
    prog.push_back(i_memw(0, 20, 2));                                // 24
    prog.push_back(i_memw(0, 21, 3));                                // 25
    // DDS tone on SG1, downconverted by readout 1
    prog.push_back(i_regwi(1, F_DDS));                               // 26
    prog.push_back(i_regwi(4, 16384));                               // 27
    prog.push_back(i_regwi(5, re_word(300, 1, 0, 1)));               // 28
    prog.push_back(i_synci(300));                                    // 29
    prog.push_back(i_set(2, 1, 2, 3, 4, 5, 0));                      // 30
    prog.push_back(i_set(0, 8, 0, 0, 0, 0, 0));                      // 31
    prog.push_back(i_set(0, 7, 0, 0, 0, 0, 10));                     // 32
    prog.push_back(i_waitr(1));                                      // 33
    prog.push_back(i_read(13, 1, 0));                                // 34
    prog.push_back(i_read(14, 1, 1));                                // 35
    prog.push_back(i_memw(0, 13, 4));                                // 36
    prog.push_back(i_memw(0, 14, 5));                                // 37
    // periodic ramp on SG2 (table words 128..135), then a one-shot that holds
    prog.push_back(i_regwi(1, 0));                                   // 38
    prog.push_back(i_regwi(3, 128));                                 // 39
    prog.push_back(i_regwi(5, re_word(8, 2, 1, 0)));                 // 40 periodic
    prog.push_back(i_synci(400));                                    // 41
    prog.push_back(i_set(3, 1, 2, 3, 4, 5, 0));                      // 42
    prog.push_back(i_regwi(5, re_word(4, 2, 0, 0)));                 // 43 one-shot, hold
    prog.push_back(i_set(3, 1, 2, 3, 4, 5, 100));                    // 44
    // 20 pulses on SG3, 50 clocks apart: more than its queue holds
    prog.push_back(i_regwi(3, 0));                                   // 45
    prog.push_back(i_regwi(5, re_word(10, 2, 0, 1)));                // 46
    prog.push_back(i_regwi(15, 19));                                 // 47
    prog.push_back(i_synci(50));                                     // 48
    prog.push_back(i_set(4, 1, 2, 3, 4, 5, 200));                    // 49
    prog.push_back(i_loopnz(15, 48));                                // 50
    // mixed pulse on SG4
    prog.push_back(i_regwi(1, F_DDS));                               // 51
    prog.push_back(i_regwi(5, re_word(200, 0, 0, 1)));               // 52
    prog.push_back(i_set(5, 1, 2, 3, 4, 5, 300));                    // 53
    prog.push_back(i_waiti(800));                                    // 54
    prog.push_back(i_end());                                         // 55
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_pulse0 = 0, n_zero0 = 0, n_stall = 0, n_periodic = 0, n_hold = 0;
  int n_dds = 0, n_mix_pos = 0, n_mix_neg = 0, n_marker = 0, n_sg3 = 0;
  int prev2, hold_run = 0, sg3_prev = 0;

  bit started = 0;
  always @(posedge clk) if (running) started <= 1;

  always @(posedge clk) if (started) begin
    if (dut.u_tproc.stall_full) n_stall++;
    if (dout[0] || dout[1]) n_marker++;
    // generator 0: flat pulse then zero
    if (dac_data[0][0] != 0) n_pulse0++;
    // generator 1: DDS tone
    if (dac_data[1][0] > 10000) n_dds++;
    // generator 2: periodic ramp restarts at its first word
    if (int'(dac_data[2][0]) == 4000 && prev2 == 7500) n_periodic++;
    prev2 = int'(dac_data[2][0]);
    // generator 2 holding the last sample of the 4-word one-shot (word 131)
    if (int'(dac_data[2][0]) == 5500 && int'(dac_data[2][15]) == 5500) hold_run++;
    else begin if (hold_run > 100) n_hold++; hold_run = 0; end
    // generator 3 pulses
    if (dac_data[3][0] != 0 && sg3_prev == 0) n_sg3++;
    sg3_prev = int'(dac_data[3][0]);
    // generator 4: envelope times carrier swings both ways
    if (dac_data[4][0] > 4000)  n_mix_pos++;
    if (dac_data[4][0] < -4000) n_mix_neg++;
  end

  // ---------------------------------------------------------------- host
  task automatic upload(logic [NSG-1:0] sel, int word0, int nwords, bit ramp);
    @(negedge clk);
    sg_cfg_we = sel; sg_cfg_addr = (AW+4)'(word0 * 16);
    @(negedge clk);
    sg_cfg_we = '0;
    for (int w = 0; w < nwords; w++)
      for (int k = 0; k < 16; k++) begin
        sg_wr_valid = sel;
        // ramp: word w = 8000 + 1000 w, so the output (gain 0.5) is 4000 + 500 w
        sg_wr_data = {16'd0, 16'(ramp ? 8000 + 1000 * w : 16000)};
        @(negedge clk);
      end
    sg_wr_valid = '0;
  endtask

  initial begin
    rst_n = 0; host_start = 0; start_src = 0; ext_start = 0;
    pmem_addr = 0; pmem_we = 0; pmem_wdata = 0;
    dmem_addr = 0; dmem_we = 0; dmem_wdata = 0;
    sg_cfg_we = 0; sg_cfg_addr = 0; sg_wr_valid = 0; sg_wr_data = 0;
    for (int r = 0; r < NRO; r++) begin
      ro_avg_rd_addr[r] = 0; ro_raw_rd_addr[r] = 0;
    end
    // readout 0: bypass, window of 32 decimated samples inside the 100-clock pulse
    ro_cfg_freq[0] = 0; ro_cfg_outsel[0] = 1; ro_cfg_offset[0] = 30; ro_cfg_length[0] = 32;
    // readout 1: downconvert at the tone frequency as seen at the ADC rate
    ro_cfg_freq[1] = 2 * F_DDS; ro_cfg_outsel[1] = 0; ro_cfg_offset[1] = 40; ro_cfg_length[1] = 128;
    ro_cfg_clear = '1;
    build();
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(negedge clk); ro_cfg_clear = '0;
    // envelopes: flat words 0..127 in every generator, ramp words 128..135 in SG2
    upload('1, 0, 128, 0);
    upload(7'b0000100, 128, 8, 1);
    // program and cleared result words
    foreach (prog[i]) begin
      @(negedge clk); pmem_we = 1; pmem_addr = 12'(i); pmem_wdata = prog[i];
    end
    @(negedge clk); pmem_we = 0;
    for (int a = 0; a < 8; a++) begin
      @(negedge clk); dmem_we = 1; dmem_addr = 12'(a); dmem_wdata = 0;
    end
    @(negedge clk); dmem_we = 0;
    // start by the host register
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0;
    chk(running, "processor started");
    wait (!running);
    repeat (50) @(negedge clk);
    check_results();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- results
  function automatic longint sext32(logic [31:0] v);
    return longint'(signed'(v));
  endfunction

  task automatic rd_dmem(int a, output logic [31:0] v);
    @(negedge clk); dmem_addr = 12'(a);
    @(posedge clk); #1;
    v = dmem_rdata;
  endtask

  task automatic check_results();
    logic [31:0] hi, lo, nlo, nhi, di, dq;
    rd_dmem(0, hi); rd_dmem(1, lo); rd_dmem(2, nlo); rd_dmem(3, nhi);
    rd_dmem(4, di); rd_dmem(5, dq);
    // flat pulse of 16000 at gain 16384/32768 -> 8000 per sample, 32 samples
    chk(sext32(hi) == 32 * 8000, $sformatf("strong shot sum %0d", sext32(hi)));
    // weak shot: 16000 * 2000 >>> 15 = 976
    chk(sext32(lo) == 32 * 976, $sformatf("weak shot sum %0d", sext32(lo)));
    chk(nlo == 1 && nhi == 1, $sformatf("feedback branch: low %0d high %0d", nlo, nhi));
    // tone downconverted at its own frequency: I = A cos^2 > 0, Q small
    chk(sext32(di) > 128 * 3000, $sformatf("downconverted I %0d", sext32(di)));
    chk(sext32(dq) < sext32(di) / 4 && sext32(dq) > -sext32(di) / 4,
        $sformatf("downconverted Q %0d vs I %0d", sext32(dq), sext32(di)));
    // buffers: two averaged results and 64 raw samples in readout 0
    chk(ro_avg_count[0] == 2 && ro_raw_count[0] == 64,
        $sformatf("readout 0 buffer counts %0d %0d", ro_avg_count[0], ro_raw_count[0]));
    chk(ro_avg_count[1] == 1 && ro_raw_count[1] == 128,
        $sformatf("readout 1 buffer counts %0d %0d", ro_avg_count[1], ro_raw_count[1]));
    @(negedge clk); ro_avg_rd_addr[0] = 0; ro_raw_rd_addr[0] = 5;
    @(posedge clk); #1;
    chk(ro_avg_rd_data[0] == {32'd0, hi}, "averaged buffer word 0");
    chk(ro_raw_rd_data[0] == {16'd0, 16'd8000}, "raw buffer sample");
    @(negedge clk); ro_avg_rd_addr[0] = 1; ro_raw_rd_addr[0] = 40;
    @(posedge clk); #1;
    chk(ro_avg_rd_data[0] == {32'd0, lo}, "averaged buffer word 1");
    chk(ro_raw_rd_data[0] == {16'd0, 16'd976}, "raw buffer sample, weak shot");
    @(negedge clk); ro_avg_rd_addr[1] = 0;
    @(posedge clk); #1;
    chk(ro_avg_rd_data[1] == {dq, di}, "readout 1 buffer = feedback");
    // mechanisms
    $display("mechanisms: pulse0 %0d stall %0d periodic %0d hold %0d dds %0d mix %0d/%0d marker %0d sg3 %0d",
             n_pulse0, n_stall, n_periodic, n_hold + (hold_run > 100), n_dds, n_mix_pos, n_mix_neg,
             n_marker, n_sg3);
    chk(n_pulse0 == 200, $sformatf("generator 0 played two 100-clock pulses (%0d)", n_pulse0));
    chk(dac_data[0][0] == 0, "generator 0 returns to zero (stdsel 1)");
    chk(n_stall > 0, "queue-full stall");
    chk(n_periodic >= 5, "periodic mode repeats");
    chk(n_hold + (hold_run > 100) == 1, "hold of last sample (stdsel 0)");
    chk(n_dds > 0, "DDS output");
    chk(n_mix_pos > 0 && n_mix_neg > 0, "mixed output");
    chk(n_marker > 0, "marker outputs");
    chk(n_sg3 == 20, $sformatf("20 pulses on generator 3 (%0d)", n_sg3));
  endtask
endmodule
