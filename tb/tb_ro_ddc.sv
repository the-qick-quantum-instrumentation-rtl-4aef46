// tb_ro_ddc: self-checking test of readout downconversion and bypass. With
// random ADC words and time, outputs three clocks later must equal
// x*cos and -x*sin of freq*(8*t + k) (Q1.15, tolerance 1), or the raw samples
// with Q = 0 in bypass.
module tb_ro_ddc;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int L = 8;
  time_t t_now;
  logic [31:0] freq;
  logic outsel;
  sample_t adc [L], i_o [L], q_o [L];
  ro_ddc #(.LANES(L)) dut (.*);

  function automatic int rsin(logic [31:0] ph, bit c);
    real v;
    int idx;
    idx = int'(ph[31:22]);
    if (c) idx = (idx + 256) % 1024;
    v = 32767.0 * $sin(2.0 * 3.14159265358979323846 * real'(idx) / 1024.0);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  typedef struct { time_t t; logic [31:0] f; logic s; int x [L]; } in_t;
  in_t h [4];

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t_now = 0; freq = 0; outsel = 0;
    for (int k = 0; k < L; k++) adc[k] = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      if (i >= 4) begin
        for (int k = 0; k < L; k++) begin
          int ei, eq;
          if (h[2].s) begin
            ei = h[2].x[k]; eq = 0;
          end else begin
            logic [31:0] ph;
            longint pi, pq;
            ph = h[2].f * (32'(h[2].t) * 32'(L) + 32'(k));
            pi = (longint'(h[2].x[k]) * longint'(rsin(ph, 1))) >>> 15;
            pq = -((longint'(h[2].x[k]) * longint'(rsin(ph, 0))) >>> 15);
            ei = (pi > 32767) ? 32767 : int'(pi);
            eq = (pq > 32767) ? 32767 : int'(pq);
          end
          checks += 2;
          if (int'(i_o[k]) - ei > 1 || ei - int'(i_o[k]) > 1) begin failures++; $display("FAIL I lane %0d %0d %0d", k, i_o[k], ei); end
          if (int'(q_o[k]) - eq > 1 || eq - int'(q_o[k]) > 1) begin failures++; $display("FAIL Q lane %0d %0d %0d", k, q_o[k], eq); end
        end
      end
      for (int j = 3; j > 0; j--) h[j] = h[j-1];
      t_now = {16'd0, $urandom};
      freq = $urandom;
      outsel = ($urandom_range(0, 3) == 0);
      for (int k = 0; k < L; k++) begin
        adc[k] = (i % 11 == 0) ? 16'sh8000 : 16'($urandom);
        h[0].x[k] = int'(adc[k]);
      end
      h[0].t = t_now; h[0].f = freq; h[0].s = outsel;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
