// tb_readout: self-checking test of one full readout chain. The ADC word of
// each clock holds one value on all 8 lanes, so the boxcar filter returns that
// value and the decimated stream equals the per-clock input. Windows are
// triggered at random times in bypass mode and in downconversion mode with a
// zero-frequency DDS (cos = 32767, sin = 0, so I = x - (x > 0), Q = 0). The
// test checks the feedback sums and their timing, the averaged-result buffer,
// the raw buffer contents and counts, and the clear input.
module tb_readout;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, trig, cfg_outsel, cfg_clear, fb_valid;
  time_t t_now;
  sample_t adc [8];
  logic [31:0] cfg_freq;
  logic [15:0] cfg_offset, cfg_length;
  logic [31:0] fb_i, fb_q;
  logic [9:0] avg_rd_addr, raw_rd_addr;
  logic [63:0] avg_rd_data;
  logic [31:0] raw_rd_data;
  logic [10:0] avg_count, raw_count;
  readout #(.LANES(8), .DECIM(8), .BUF_AW(10)) dut (.*);

  int cyc = 0;
  int v [int];
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) t_now <= rst_n ? t_now + 1 : '0;

  always @(negedge clk) begin
    int x;
    x = $urandom_range(0, 8000) - 4000;
    v[cyc] = x;
    for (int k = 0; k < 8; k++) adc[k] = 16'(x);
  end

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

  int exp_avg_i [$];
  int exp_raw [$];
  initial begin
    rst_n = 0; trig = 0; cfg_outsel = 1; cfg_clear = 0; cfg_freq = 0;
    cfg_offset = 0; cfg_length = 1; avg_rd_addr = 0; raw_rd_addr = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    repeat (10) @(negedge clk);
    for (int w = 0; w < 30; w++) begin
      int tc, off, len, first, last, wait_n;
      longint ei;
      bit ddc;
      ddc = (w >= 15);
      off = $urandom_range(0, 10);
      len = $urandom_range(1, 20);
      @(negedge clk); #1;
      cfg_outsel = !ddc; cfg_offset = 16'(off); cfg_length = 16'(len);
      repeat (8) @(negedge clk);   // let the mode change flow through the pipe
      #1;
      trig = 1; tc = cyc;
      @(negedge clk); #1; trig = 0;
      // sample seen by the average block in clock n is the ADC word of n-5
      first = tc + 1 + off;
      last = first + len - 1;
      ei = 0;
      wait_n = 0;
      while (!fb_valid && wait_n < 100) begin @(posedge clk); #1; wait_n++; end
      for (int n = first; n <= last; n++) begin
        int x;
        x = v[n - 5];
        if (ddc && x > 0) x = x - 1;
        ei += x;
        exp_raw.push_back(x);
      end
      chk(fb_valid && cyc == last + 1, $sformatf("feedback timing w%0d cyc %0d exp %0d", w, cyc, last + 1));
      chk(fb_i == 32'(ei) && fb_q == 0, $sformatf("feedback sums w%0d %0d/%0d exp %0d", w, $signed(fb_i), $signed(fb_q), ei));
      exp_avg_i.push_back(int'(ei));
    end
    repeat (3) @(negedge clk);
    chk(int'(avg_count) == exp_avg_i.size(), "avg count");
    chk(int'(raw_count) == exp_raw.size(), $sformatf("raw count %0d %0d", raw_count, exp_raw.size()));
    for (int a = 0; a < exp_avg_i.size(); a++) begin
      @(negedge clk); avg_rd_addr = 10'(a);
      @(posedge clk); #1;
      chk(avg_rd_data[31:0] == 32'(exp_avg_i[a]) && avg_rd_data[63:32] == 0, $sformatf("avg buffer %0d", a));
    end
    for (int a = 0; a < exp_raw.size(); a++) begin
      @(negedge clk); raw_rd_addr = 10'(a);
      @(posedge clk); #1;
      chk(raw_rd_data == {16'd0, 16'(exp_raw[a])}, $sformatf("raw buffer %0d", a));
    end
    @(negedge clk); cfg_clear = 1;
    @(negedge clk); cfg_clear = 0;
    chk(avg_count == 0 && raw_count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
