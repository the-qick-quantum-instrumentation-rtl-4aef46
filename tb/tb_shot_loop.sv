// tb_shot_loop: workload test at default sizes: a loop of 3000 shots, the
// number of shots per data point of the randomized-benchmarking run on a
// transmon. Each shot plays a short readout pulse on DAC 0 (looped back into
// ADC 0), triggers readout 0 and waits for the result; the program stores
// every shot's I sum in data memory and keeps a running total in a register,
// and steps the pulse gain through 0, 1000, ..., 15000 (a CONDJ wraps it).
// One shot every 60 clocks.
//
// Checked: every stored result against the exact loop-back value
// 8 * ((16000 * gain) >>> 15) (flat envelope, bypass, 8-sample window
// inside the pulse), the running total, and the averaged-result circular
// buffer after 3000 writes into 1024 entries: its count saturates and slot j
// holds the last shot s with s mod 1024 = j.
module tb_shot_loop;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NSHOT = 3000;

  logic [63:0] prog [$];
  task automatic build();
    prog = {};
    prog.push_back(i_regwi(1, 0));                                   // 0
    prog.push_back(i_regwi(2, 0));                                   // 1
    prog.push_back(i_regwi(3, 0));                                   // 2
    prog.push_back(i_regwi(4, 0));                                   // 3 gain
    prog.push_back(i_regwi(5, {12'd0, 1'b1, 1'b0, 2'd2, 16'd16}));   // 4
    prog.push_back(i_regwi(6, 1));                                   // 5
    prog.push_back(i_regwi(7, 0));                                   // 6
    prog.push_back(i_regwi(8, NSHOT - 1));                           // 7 counter
    prog.push_back(i_regwi(9, 0));                                   // 8 shot index
    prog.push_back(i_regwi(14, 0));                                  // 9 running total
    prog.push_back(i_regwi(15, 16000));                              // 10 gain wrap
    prog.push_back(i_synci(60));                                     // 11 loop
    prog.push_back(i_set(1, 1, 2, 3, 4, 5, 0));                      // 12
    prog.push_back(i_set(0, 6, 0, 0, 0, 0, 0));                      // 13
    prog.push_back(i_set(0, 7, 0, 0, 0, 0, 4));                      // 14
    prog.push_back(i_waitr(0));                                      // 15
    prog.push_back(i_read(10, 0, 0));                                // 16
    prog.push_back(i_memw(9, 10, 0));                                // 17 dmem[s] = I
    prog.push_back(i_math(ALU_ADD, 14, 14, 10));                     // 18
    prog.push_back(i_mathi(ALU_ADD, 9, 9, 1));                       // 19
    prog.push_back(i_mathi(ALU_ADD, 4, 4, 1000));                    // 20
    prog.push_back(i_condj(CND_LT, 4, 15, 23));                      // 21
    prog.push_back(i_regwi(4, 0));                                   // 22
    prog.push_back(i_loopnz(8, 11));                                 // 23
    prog.push_back(i_memw(0, 14, 4000));                             // 24 total
    prog.push_back(i_end());                                         // 25
  endtask

  function automatic longint expect_shot(int s);
    return 8 * ((longint'(16000) * ((s % 16) * 1000)) >>> 15);
  endfunction

  initial begin
    longint total;
    rst_n = 0; host_start = 0; start_src = 0; ext_start = 0;
    pmem_addr = 0; pmem_we = 0; pmem_wdata = 0;
    dmem_addr = 0; dmem_we = 0; dmem_wdata = 0;
    sg_cfg_we = 0; sg_cfg_addr = 0; sg_wr_valid = 0; sg_wr_data = 0;
    for (int r = 0; r < NRO; r++) begin
      ro_avg_rd_addr[r] = 0; ro_raw_rd_addr[r] = 0;
      ro_cfg_freq[r] = 0; ro_cfg_offset[r] = 26; ro_cfg_length[r] = 8;
    end
    ro_cfg_outsel = '1;
    ro_cfg_clear = '1;
    build();
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(negedge clk); ro_cfg_clear = '0;
    sg_cfg_we = 7'b1; sg_cfg_addr = '0;
    @(negedge clk); sg_cfg_we = '0;
    for (int n = 0; n < 16*16; n++) begin
      sg_wr_valid = 7'b1; sg_wr_data = {16'd0, 16'd16000};
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
    chk(t_now > 60 * NSHOT && t_now < 60 * NSHOT + 200, $sformatf("run length %0d clocks", t_now));
    repeat (10) @(negedge clk);
    total = 0;
    for (int s = 0; s < NSHOT; s++) begin
      @(negedge clk); dmem_addr = 12'(s);
      @(posedge clk); #1;
      total += expect_shot(s);
      chk(longint'(signed'(dmem_rdata)) == expect_shot(s),
          $sformatf("shot %0d: %0d expected %0d", s, signed'(dmem_rdata), expect_shot(s)));
    end
    @(negedge clk); dmem_addr = 12'(4000);
    @(posedge clk); #1;
    chk(longint'(signed'(dmem_rdata)) == total, $sformatf("running total %0d expected %0d", signed'(dmem_rdata), total));
    chk(ro_avg_count[0] == 1024, $sformatf("averaged buffer count saturates (%0d)", ro_avg_count[0]));
    for (int j = 0; j < 1024; j++) begin
      int s;
      s = j + 1024 * ((NSHOT - 1 - j) / 1024);
      @(negedge clk); ro_avg_rd_addr[0] = BAW'(j);
      @(posedge clk); #1;
      chk(longint'(signed'(ro_avg_rd_data[0][31:0])) == expect_shot(s), $sformatf("buffer slot %0d", j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
