// tb_sg_gain: self-checking test of the Q1.15 gain stage with saturation.
module tb_sg_gain;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int LANES = 16;
  sample_t gain;
  sample_t x [LANES], y [LANES];
  sg_gain #(.LANES(LANES)) dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      int e [LANES];
      @(negedge clk);
      gain = (i % 9 == 0) ? 16'sh8000 : 16'($urandom);
      for (int k = 0; k < LANES; k++) begin
        longint p;
        x[k] = (i % 9 == 0 && k == 0) ? 16'sh8000 : 16'($urandom);
        p = (longint'(x[k]) * longint'(gain)) >>> 15;
        e[k] = (p > 32767) ? 32767 : (p < -32768) ? -32768 : int'(p);
      end
      @(posedge clk); #1;
      for (int k = 0; k < LANES; k++) begin
        checks++;
        if (int'(y[k]) != e[k]) begin
          failures++; $display("FAIL lane %0d got %0d exp %0d", k, y[k], e[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
