// tb_ro_average: self-checking test of the triggered accumulator. Random
// windows (offset, length, trigger time) over a random sample stream: the sums,
// the clock of sum_valid, the capture window and the ignoring of a trigger
// that arrives while a window is open are compared with a model.
module tb_ro_average;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, trig, cap_valid, sum_valid, busy;
  logic [15:0] offset, length;
  sample_t in_i, in_q;
  logic signed [31:0] sum_i, sum_q;
  ro_average #(.ACC_W(32)) dut (.*);

  int cyc = 0;
  int si [int], sq [int];
  always @(posedge clk) cyc <= cyc + 1;

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

  // drive a random stream, remembering the sample of each clock
  always @(negedge clk) begin
    in_i = 16'($urandom);
    in_q = 16'($urandom);
    si[cyc] = int'(in_i);
    sq[cyc] = int'(in_q);
  end

  int ignored = 0;
  int ncap_all = 0, ncap0, ncap;
  // count the samples taken into a window at the clock edge that takes them
  always @(posedge clk) if (cap_valid) ncap_all <= ncap_all + 1;
  initial begin
    rst_n = 0; trig = 0; offset = 0; length = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int w = 0; w < 40; w++) begin
      int tc, off, len, first, last;
      longint ei, eq;
      off = (w % 5 == 0) ? 0 : $urandom_range(1, 20);
      len = (w % 7 == 0) ? 1 : $urandom_range(1, 50);
      repeat ($urandom_range(1, 5)) @(negedge clk);
      #1;
      offset = 16'(off); length = 16'(len); trig = 1; ncap0 = ncap_all;
      tc = cyc;
      @(negedge clk); #1;
      trig = 0;
      first = tc + 1 + off;
      last = first + len - 1;
      // a second trigger inside the window must be ignored
      if (w % 3 == 0 && off + len > 2) begin
        trig = 1; @(negedge clk); #1; trig = 0; ignored++;
      end
      ei = 0; eq = 0;
      while (cyc <= last) begin
        @(posedge clk); #1;
      end
      // now cyc == last + 1: sum_valid must be high in this clock
      ncap = ncap_all - ncap0;
      for (int n = first; n <= last; n++) begin ei += si[n]; eq += sq[n]; end
      chk(sum_valid, $sformatf("sum_valid in clock %0d", cyc));
      chk(sum_i == 32'(ei) && sum_q == 32'(eq), $sformatf("sums window %0d: %0d/%0d vs %0d/%0d", w, sum_i, sum_q, ei, eq));
      chk(ncap == len, $sformatf("capture window %0d length %0d vs %0d off %0d tc %0d", w, ncap, len, off, tc));
      @(posedge clk); #1;
      chk(!sum_valid && !busy, "single-clock result, idle after");
    end
    chk(ignored > 0, "busy trigger case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
