// tb_rabi_sweep: workload test of the complete firmware at default sizes: an
// amplitude (Rabi) sweep of a 100 ns Gaussian pulse (sigma 25 ns), the pulse
// used for the Rabi measurement of a transmon.
//
// At 6.144 GS/s the pulse is 615 samples; it is stored as 40 table words
// (640 samples) of round(30000 * exp(-(n-320)^2 / (2 * 153.6^2))), computed
// here. The program loops over ten gains (0, 3000, ..., 27000): each shot
// plays the pulse on generator 0 with envelope-only output, triggers readout
// 0 by marker bit 0 with a 64-sample window around the pulse, waits for the
// result, stores it in data memory and advances the time offset by 200
// clocks. DAC 0 is looped back to ADC 0 (ADC lane k = DAC lane 2k); the
// readout bypasses downconversion, so each expected sum is exact:
//   sum = sum over clocks c of floor( sum_k y(16c + 2k) / 8 ),
//   y(n) = (env(n) * gain) >>> 15.
// The bench checks every stored sum, the averaged buffer, that the sweep is
// monotonic, and the pulse spacing on the DAC (200 clocks per shot).
module tb_rabi_sweep;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NSG = 7, NRO = 2, AW = 12, BAW = 10;
  localparam int NSHOT = 10, NWORD = 40;

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

  // ---------------------------------------------------------------- envelope and model
  int env [NWORD*16];
  initial
    for (int n = 0; n < NWORD*16; n++) begin
      real x;
      x = (real'(n) - 320.0) / 153.6;
      env[n] = $rtoi(30000.0 * $exp(-0.5 * x * x) + 0.5);
    end

  function automatic longint model_sum(int gain);
    longint s;
    s = 0;
    for (int c = 0; c < NWORD; c++) begin
      longint a;
      a = 0;
      for (int k = 0; k < 8; k++) a += (longint'(env[16*c + 2*k]) * gain) >>> 15;
      s += a >>> 3;
    end
    return s;
  endfunction

  // ---------------------------------------------------------------- program
  logic [63:0] prog [$];
  task automatic build();
    prog = {};
    prog.push_back(i_regwi(1, 0));                                   // 0 freq
    prog.push_back(i_regwi(2, 0));                                   // 1 phase
    prog.push_back(i_regwi(3, 0));                                   // 2 address
    prog.push_back(i_regwi(4, 0));                                   // 3 gain
    prog.push_back(i_regwi(5, {12'd0, 1'b1, 1'b0, 2'd2, 16'(NWORD)}));// 4 envelope, one-shot, zero after
    prog.push_back(i_regwi(6, 1));                                   // 5 marker 0 high
    prog.push_back(i_regwi(7, 0));                                   // 6 markers low
    prog.push_back(i_regwi(8, NSHOT - 1));                           // 7 shot counter
    prog.push_back(i_regwi(9, 0));                                   // 8 result index
    prog.push_back(i_synci(200));                                    // 9 loop
    prog.push_back(i_set(1, 1, 2, 3, 4, 5, 0));                      // 10
    prog.push_back(i_set(0, 6, 0, 0, 0, 0, 0));                      // 11
    prog.push_back(i_set(0, 7, 0, 0, 0, 0, 5));                      // 12
    prog.push_back(i_waitr(0));                                      // 13
    prog.push_back(i_read(10, 0, 0));                                // 14
    prog.push_back(i_memw(9, 10, 0));                                // 15 dmem[idx] = I sum
    prog.push_back(i_mathi(ALU_ADD, 9, 9, 1));                       // 16
    prog.push_back(i_mathi(ALU_ADD, 4, 4, 3000));                    // 17 next amplitude
    prog.push_back(i_loopnz(8, 9));                                  // 18
    prog.push_back(i_end());                                         // 19
  endtask

  // pulse start times on DAC 0
  longint starts [$];
  bit prev_on = 0;
  always @(posedge clk) begin
    bit on;
    on = 0;
    for (int k = 0; k < 16; k++) if (dac_data[0][k] != 0) on = 1;
    if (rst_n && running && on && !prev_on) starts.push_back(longint'(t_now));
    prev_on = on;
  end

  initial begin
    rst_n = 0; host_start = 0; start_src = 0; ext_start = 0;
    pmem_addr = 0; pmem_we = 0; pmem_wdata = 0;
    dmem_addr = 0; dmem_we = 0; dmem_wdata = 0;
    sg_cfg_we = 0; sg_cfg_addr = 0; sg_wr_valid = 0; sg_wr_data = 0;
    for (int r = 0; r < NRO; r++) begin
      ro_avg_rd_addr[r] = 0; ro_raw_rd_addr[r] = 0;
      ro_cfg_freq[r] = 0; ro_cfg_offset[r] = 10; ro_cfg_length[r] = 64;
    end
    ro_cfg_outsel = '1;
    ro_cfg_clear = '1;
    build();
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(negedge clk); ro_cfg_clear = '0;
    // envelope upload into generator 0, table word 0 on
    sg_cfg_we = 7'b1; sg_cfg_addr = '0;
    @(negedge clk); sg_cfg_we = '0;
    for (int n = 0; n < NWORD*16; n++) begin
      sg_wr_valid = 7'b1; sg_wr_data = {16'd0, 16'(env[n])};
      @(negedge clk);
    end
    sg_wr_valid = '0;
    foreach (prog[i]) begin
      @(negedge clk); pmem_we = 1; pmem_addr = 12'(i); pmem_wdata = prog[i];
    end
    @(negedge clk); pmem_we = 0;
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0;
    wait (!running);
    repeat (10) @(negedge clk);
    begin
      longint prev;
      prev = -1;
      chk(ro_avg_count[0] == NSHOT, $sformatf("averaged results %0d", ro_avg_count[0]));
      for (int i = 0; i < NSHOT; i++) begin
        longint got, want;
        @(negedge clk); dmem_addr = 12'(i); ro_avg_rd_addr[0] = BAW'(i);
        @(posedge clk); #1;
        got = longint'(signed'(dmem_rdata));
        want = model_sum(3000 * i);
        chk(got == want, $sformatf("shot %0d gain %0d: sum %0d expected %0d", i, 3000 * i, got, want));
        chk(ro_avg_rd_data[0][31:0] == dmem_rdata && ro_avg_rd_data[0][63:32] == 0,
            $sformatf("averaged buffer entry %0d", i));
        chk(got > prev, "amplitude sweep is monotonic");
        prev = got;
      end
    end
    // shot 0 has zero gain, so nine pulses are seen, 200 clocks apart
    chk(starts.size() == NSHOT - 1, $sformatf("pulses seen %0d", starts.size()));
    for (int i = 1; i < starts.size(); i++)
      chk(starts[i] - starts[i-1] == 200, $sformatf("pulse spacing %0d", starts[i] - starts[i-1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
