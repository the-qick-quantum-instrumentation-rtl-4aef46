// tb_dds_lanes: self-checking test of the parallel DDS. For random time,
// frequency and phase the lane outputs two clocks later must equal
// 32767*sin / cos of phase + freq*(LANES*t + k), computed here with real
// arithmetic from the 10 most significant phase bits (tolerance 1 LSB).
module tb_dds_lanes;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int LANES = 16;
  time_t t;
  logic [31:0] freq, phase;
  sample_t cos_o [LANES], sin_o [LANES];
  dds_lanes #(.LANES(LANES)) dut (.*);

  function automatic int ref_sin(logic [31:0] ph, bit c);
    real a, v;
    int idx;
    idx = int'(ph[31:22]);
    if (c) idx = (idx + 256) % 1024;
    a = 2.0 * 3.14159265358979323846 * real'(idx) / 1024.0;
    v = 32767.0 * $sin(a);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  time_t t_h [3];
  logic [31:0] f_h [3], p_h [3];
  int n = 0;
  always @(posedge clk) begin
    t_h[2] <= t_h[1]; t_h[1] <= t_h[0]; t_h[0] <= t;
    f_h[2] <= f_h[1]; f_h[1] <= f_h[0]; f_h[0] <= freq;
    p_h[2] <= p_h[1]; p_h[1] <= p_h[0]; p_h[0] <= phase;
  end

  initial begin
    t = 0; freq = 0; phase = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if (i >= 3) begin
        for (int k = 0; k < LANES; k++) begin
          logic [31:0] ph;
          int es, ec;
          ph = p_h[1] + f_h[1] * (32'(t_h[1]) * LANES + 32'(k));
          es = ref_sin(ph, 0);
          ec = ref_sin(ph, 1);
          checks += 2;
          if (int'(sin_o[k]) - es > 1 || es - int'(sin_o[k]) > 1) begin
            failures++; $display("FAIL sin lane %0d got %0d exp %0d", k, sin_o[k], es);
          end
          if (int'(cos_o[k]) - ec > 1 || ec - int'(cos_o[k]) > 1) begin
            failures++; $display("FAIL cos lane %0d got %0d exp %0d", k, cos_o[k], ec);
          end
        end
      end
      t = {16'($urandom), $urandom};
      freq = $urandom;
      phase = $urandom;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
