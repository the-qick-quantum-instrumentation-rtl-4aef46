// tb_ro_decim: self-checking test of decimation by 8 on an 8-lane stream:
// the output must be every 8th serial sample (the last lane), one clock later.
module tb_ro_decim;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sample_t i_i [8], q_i [8], i_o [1], q_o [1];
  ro_decim #(.LANES(8), .DECIM(8)) dut (.*);

  // a second instance with 16 lanes and factor 4 checks the general indexing
  sample_t i2 [16], q2 [16], io2 [4], qo2 [4];
  ro_decim #(.LANES(16), .DECIM(4)) dut2 (.clk, .i_i(i2), .q_i(q2), .i_o(io2), .q_o(qo2));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int k = 0; k < 8; k++) begin i_i[k] = 16'($urandom); q_i[k] = 16'($urandom); end
      for (int k = 0; k < 16; k++) begin i2[k] = 16'($urandom); q2[k] = 16'($urandom); end
      @(posedge clk); #1;
      checks += 2;
      if (i_o[0] !== i_i[7]) begin failures++; $display("FAIL I"); end
      if (q_o[0] !== q_i[7]) begin failures++; $display("FAIL Q"); end
      for (int m = 0; m < 4; m++) begin
        checks++;
        if (io2[m] !== i2[4*m+3] || qo2[m] !== q2[4*m+3]) begin failures++; $display("FAIL 16/4 m=%0d", m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
