// tb_tproc: self-checking test of the timed processor with its program memory.
//
// The test program exercises every instruction: register, math and bitwise
// operations, data memory writes and reads (one word preloaded by the host),
// the stack, a LOOPNZ loop, taken and not-taken conditional jumps, SYNCI, SET on
// four channels, a queue-full stall (20 entries into a 16-deep queue), output
// back-pressure, WAITI, and readout feedback through WAITR/READ driving a
// conditional branch. The host then reads the data memory. Every channel
// output is compared with its expected payload and release time (master clock
// one past the entry's time when the consumer is ready). The whole program is
// run twice: once started by the host register and once by the external start
// input, which also checks that start clears the master clock and t_off.
module tb_tproc;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int AW = 8;
  logic rst_n, host_start, start_src, ext_start, running;
  logic [AW-1:0] pmem_addr, ph_addr;
  logic [63:0] pmem_data, ph_wdata, ph_rdata;
  logic ph_we;
  logic [AW-1:0] dmem_host_addr;
  logic dmem_host_we;
  logic [31:0] dmem_host_wdata, dmem_host_rdata;
  logic [1:0] ro_valid;
  logic [31:0] ro_i [2], ro_q [2];
  logic [7:0] ch_valid, ch_ready;
  payload_t ch_payload [8];
  time_t t_now;

  tproc_mem #(.DW(64), .AW(AW)) u_pmem (
    .clk, .a_addr(pmem_addr), .a_we(1'b0), .a_wdata('0), .a_rdata(pmem_data),
    .b_addr(ph_addr), .b_we(ph_we), .b_wdata(ph_wdata), .b_rdata(ph_rdata));
  tproc #(.N_CH(8), .NRO(2), .PMEM_AW(AW), .DMEM_AW(AW), .QDEPTH(16), .STACK_DEPTH(8)) dut (
    .clk, .rst_n, .host_start, .start_src, .ext_start, .running,
    .pmem_addr, .pmem_data, .dmem_host_addr, .dmem_host_we, .dmem_host_wdata,
    .dmem_host_rdata, .ro_valid, .ro_i, .ro_q, .ch_valid, .ch_ready, .ch_payload, .t_now);

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

  // ---------------------------------------------------------------- program
  logic [63:0] prog [$];
  task automatic build();
    prog = {};
    prog.push_back(i_regwi(1, 7));                 // 0
    prog.push_back(i_regwi(2, 5));                 // 1
    prog.push_back(i_math(ALU_ADD, 3, 1, 2));      // 2  r3 = 12
    prog.push_back(i_math(ALU_SUB, 4, 1, 2));      // 3  r4 = 2
    prog.push_back(i_mathi(ALU_SHL, 5, 1, 4));     // 4  r5 = 112
    prog.push_back(i_mathi(ALU_XOR, 6, 1, 'hFF));  // 5  r6 = 0xF8
    prog.push_back(i_memw(0, 3, 0));               // 6
    prog.push_back(i_memw(0, 4, 1));               // 7
    prog.push_back(i_memw(0, 5, 2));               // 8
    prog.push_back(i_memw(0, 6, 3));               // 9
    prog.push_back(i_push(3));                     // 10
    prog.push_back(i_push(4));                     // 11
    prog.push_back(i_pop(7));                      // 12 r7 = 2
    prog.push_back(i_pop(8));                      // 13 r8 = 12
    prog.push_back(i_math(ALU_SUB, 9, 8, 7));      // 14 r9 = 10
    prog.push_back(i_memw(0, 9, 4));               // 15
    prog.push_back(i_memr(10, 0, 100));            // 16 r10 = dmem[100]
    prog.push_back(i_mathi(ALU_ADD, 10, 10, 1));   // 17
    prog.push_back(i_memw(0, 10, 5));              // 18
    prog.push_back(i_regwi(11, 4));                // 19
    prog.push_back(i_regwi(12, 0));                // 20
    prog.push_back(i_mathi(ALU_ADD, 12, 12, 3));   // 21 body, 5 times
    prog.push_back(i_loopnz(11, 21));              // 22
    prog.push_back(i_memw(0, 12, 6));              // 23 15
    prog.push_back(i_condj(CND_GT, 1, 2, 26));     // 24 taken
    prog.push_back(i_memw(0, 1, 7));               // 25 skipped
    prog.push_back(i_condj(CND_LT, 1, 2, 28));     // 26 not taken
    prog.push_back(i_memw(0, 2, 8));               // 27 executed
    prog.push_back(i_synci(100));                  // 28 t_off = 100
    prog.push_back(i_regwi(13, 'hA0));             // 29
    prog.push_back(i_set(1, 13, 1, 2, 3, 4, 200)); // 30 T = 300
    prog.push_back(i_mathi(ALU_ADD, 13, 13, 1));   // 31
    prog.push_back(i_set(1, 13, 1, 2, 3, 4, 250)); // 32 T = 350
    prog.push_back(i_synci(300));                  // 33 t_off = 400
    prog.push_back(i_mathi(ALU_ADD, 13, 13, 1));   // 34
    prog.push_back(i_set(1, 13, 1, 2, 3, 4, 0));   // 35 T = 400
    prog.push_back(i_regwi(14, 19));               // 36
    prog.push_back(i_regwi(15, 'h300));            // 37
    prog.push_back(i_synci(10));                   // 38
    prog.push_back(i_set(3, 15, 0, 0, 0, 0, 100)); // 39 T = 510 + 10k
    prog.push_back(i_mathi(ALU_ADD, 15, 15, 1));   // 40
    prog.push_back(i_loopnz(14, 38));              // 41 t_off = 600 after
    prog.push_back(i_regwi(16, 7));                // 42
    prog.push_back(i_regwi(17, 'h400));            // 43
    prog.push_back(i_synci(1));                    // 44
    prog.push_back(i_set(4, 17, 0, 0, 0, 0, 200)); // 45 T = 801 + k
    prog.push_back(i_mathi(ALU_ADD, 17, 17, 1));   // 46
    prog.push_back(i_loopnz(16, 44));              // 47 t_off = 608
    prog.push_back(i_waiti(400));                  // 48 until t >= 1008
    prog.push_back(i_regwi(18, 'h555));            // 49
    prog.push_back(i_set(2, 18, 0, 0, 0, 0, 0));   // 50 T = 608 (late)
    prog.push_back(i_regwi(19, 1));                // 51
    prog.push_back(i_regwi(20, 1000));             // 52
    prog.push_back(i_regwi(21, 0));                // 53
    prog.push_back(i_waitr(0));                    // 54
    prog.push_back(i_read(22, 0, 0));              // 55
    prog.push_back(i_read(23, 0, 1));              // 56
    prog.push_back(i_condj(CND_GT, 22, 20, 60));   // 57
    prog.push_back(i_mathi(ALU_ADD, 21, 21, 1));   // 58 low result
    prog.push_back(i_jump(61));                    // 59
    prog.push_back(i_mathi(ALU_ADD, 21, 21, 16));  // 60 high result
    prog.push_back(i_memw(19, 23, 20));            // 61 dmem[20 + r19] = Q
    prog.push_back(i_loopnz(19, 54));              // 62
    prog.push_back(i_memw(0, 21, 9));              // 63
    prog.push_back(i_waitr(5));                    // 64 no such port: no wait
    prog.push_back(i_end());                       // 65
  endtask

  // ---------------------------------------------------------------- expected outputs
  typedef struct { longint t; logic [31:0] r0; bit exact; } exp_t;
  exp_t exp_q [8][$];
  int   got_n [8];
  int   n_stall = 0;

  always @(posedge clk) if (dut.stall_full) n_stall++;

  // channel monitor: payload and release time of every accepted output
  always @(posedge clk) begin
    for (int c = 0; c < 8; c++) begin
      if (rst_n && ch_valid[c] && ch_ready[c]) begin
        exp_t e;
        got_n[c]++;
        if (c == 4) begin
          // checked by the channel 4 monitor below
        end else if (exp_q[c].size() == 0) begin
          chk(0, $sformatf("unexpected output on channel %0d", c));
        end else begin
          e = exp_q[c].pop_front();
          checks++;
          if (ch_payload[c].r[0] !== e.r0 ||
              (e.exact ? (longint'(t_now) != e.t + 1) : (longint'(t_now) < e.t + 1 || longint'(t_now) > e.t + 12))) begin
            failures++;
            $display("FAIL ch%0d r0=%h t=%0d exp r0=%h t=%0d", c, ch_payload[c].r[0], t_now, e.r0, e.t + 1);
          end
          if (c == 1) begin
            chk(ch_payload[c].r[1] == 7 && ch_payload[c].r[2] == 5 && ch_payload[c].r[3] == 12 &&
                ch_payload[c].r[4] == 2, "five-register payload");
          end
        end
      end
    end
  end

  // back-pressure on channel 4, others always ready
  always @(negedge clk) ch_ready = {3'b111, 1'($urandom_range(0, 2) == 0), 4'b1111};

  task automatic expect_all();
    for (int c = 0; c < 8; c++) begin exp_q[c] = {}; got_n[c] = 0; end
    exp_q[1].push_back('{300, 32'hA0, 1});
    exp_q[1].push_back('{350, 32'hA1, 1});
    exp_q[1].push_back('{400, 32'hA2, 1});
    for (int k = 0; k < 20; k++) exp_q[3].push_back('{510 + 10 * k, 32'h300 + k, 1});
    // channel 2: pushed late (after WAITI until 1008): released within a few clocks
    exp_q[2].push_back('{1008, 32'h555, 0});
  endtask

  task automatic run(bit ext);
    int nst0;
    expect_all();
    nst0 = n_stall;
    @(negedge clk);
    if (ext) begin start_src = 1; ext_start = 1; end
    else     begin start_src = 0; host_start = 1; end
    @(negedge clk);
    host_start = 0; ext_start = 0;
    chk(running && t_now == 0, "start clears master clock");
    // readout results for the two WAITR iterations
    wait (t_now >= 1100);
    @(negedge clk); ro_valid = 2'b01; ro_i[0] = 5000; ro_q[0] = 88;
    @(negedge clk); ro_valid = 2'b00;
    wait (t_now >= 1200);
    @(negedge clk); ro_valid = 2'b01; ro_i[0] = 10; ro_q[0] = 77;
    @(negedge clk); ro_valid = 2'b00;
    wait (!running);
    chk(t_now > 1200 && t_now < 1260, $sformatf("program end time %0d", t_now));
    repeat (30) @(negedge clk);
    chk(t_now > 1230, "master clock keeps counting after END");
    chk(n_stall - nst0 > 100, $sformatf("queue-full stall seen (%0d clocks)", n_stall - nst0));
    for (int c = 0; c < 8; c++)
      chk(exp_q[c].size() == 0, $sformatf("channel %0d: %0d outputs missing", c, exp_q[c].size()));
    chk(got_n[4] == 8, $sformatf("channel 4 back-pressured outputs %0d", got_n[4]));
    // data memory results
    begin
      int want [int];
      want[0] = 12; want[1] = 2; want[2] = 112; want[3] = 'hF8; want[4] = 10;
      want[5] = 'h1235; want[6] = 15; want[7] = 0; want[8] = 5; want[9] = 17;
      want[20] = 77; want[21] = 88;
      foreach (want[a]) begin
        @(negedge clk); dmem_host_addr = AW'(a);
        @(posedge clk); #1;
        chk(dmem_host_rdata == 32'(want[a]), $sformatf("dmem[%0d] = %0h exp %0h", a, dmem_host_rdata, want[a]));
      end
    end
  endtask

  // channel 4 order and payloads with random ready
  logic [31:0] ch4_next;
  always @(posedge clk) begin
    if (rst_n && ch_valid[4] && ch_ready[4]) begin
      checks++;
      if (ch_payload[4].r[0] != ch4_next || t_now < 802 + (ch4_next - 32'h400)) begin
        failures++; $display("FAIL ch4 %h at %0d", ch_payload[4].r[0], t_now);
      end
      ch4_next <= ch4_next + 1;
    end
  end

  initial begin
    rst_n = 0; host_start = 0; start_src = 0; ext_start = 0; ro_valid = 0;
    ro_i = '{0, 0}; ro_q = '{0, 0};
    ph_we = 0; ph_addr = 0; ph_wdata = 0;
    dmem_host_addr = 0; dmem_host_we = 0; dmem_host_wdata = 0;
    build();
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // host loads the program and one data word
    foreach (prog[i]) begin
      @(negedge clk); ph_we = 1; ph_addr = AW'(i); ph_wdata = prog[i];
    end
    @(negedge clk); ph_we = 0;
    dmem_host_we = 1; dmem_host_addr = 100; dmem_host_wdata = 'h1234;
    @(negedge clk); dmem_host_we = 0;
    // clear the result words before each run
    for (int r = 0; r < 2; r++) begin
      for (int a = 0; a < 32; a++) begin
        @(negedge clk); dmem_host_we = 1; dmem_host_addr = AW'(a); dmem_host_wdata = 0;
      end
      @(negedge clk); dmem_host_we = 0;
      ch4_next = 32'h400;
      run(r == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
