// tb_master_clock: self-checking test of the 48-bit master clock: counts one
// per enabled clock, holds when disabled, clear has priority.
module tb_master_clock;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, clear, en;
  logic [47:0] t;
  longint unsigned model;
  master_clock #(.W(48)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; en = 0; model = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (t !== 48'(model)) begin failures++; $display("FAIL t=%0d model=%0d", t, model); end
      en = ($urandom_range(0, 9) != 0);
      clear = ($urandom_range(0, 99) == 0);
      @(posedge clk); #1;
      if (clear) model = 0; else if (en) model++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
