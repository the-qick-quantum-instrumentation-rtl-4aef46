// tb_ro_fir: self-checking test of the readout FIR on a serial model: a
// random stream is cut into 8-sample words, and every output sample must be
// the 8-sample moving sum >>> 3 of the serial stream (I and Q).
module tb_ro_fir;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int L = 8;
  sample_t i_i [L], q_i [L], i_o [L], q_o [L];
  ro_fir #(.LANES(L)) dut (.*);

  int si [$], sq [$];   // serial input streams

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < L; k++) begin i_i[k] = 0; q_i[k] = 0; end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int k = 0; k < L; k++) begin
        i_i[k] = (i % 13 == 0) ? 16'sh7fff : 16'($urandom);
        q_i[k] = (i % 13 == 0) ? 16'sh8000 : 16'($urandom);
        si.push_back(int'(i_i[k]));
        sq.push_back(int'(q_i[k]));
      end
      @(posedge clk); #1;
      if (i >= 1) begin
        for (int k = 0; k < L; k++) begin
          longint ai, aq;
          int n;
          n = i * L + k;
          ai = 0; aq = 0;
          for (int j = 0; j < 8; j++) begin ai += si[n-j]; aq += sq[n-j]; end
          checks += 2;
          if (int'(i_o[k]) != int'(ai >>> 3)) begin failures++; $display("FAIL I n=%0d got %0d exp %0d", n, i_o[k], ai >>> 3); end
          if (int'(q_o[k]) != int'(aq >>> 3)) begin failures++; $display("FAIL Q n=%0d", n); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
