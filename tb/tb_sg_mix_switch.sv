// tb_sg_mix_switch: self-checking test of the complex mixer and output switch
// for all four outsel values with random samples (including full scale).
module tb_sg_mix_switch;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int LANES = 16;
  logic [1:0] outsel;
  sample_t env_i [LANES], env_q [LANES], cos_i [LANES], sin_i [LANES], y [LANES];
  sg_mix_switch #(.LANES(LANES)) dut (.*);

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

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
      outsel = 2'($urandom_range(0, 3));
      for (int k = 0; k < LANES; k++) begin
        env_i[k] = (i % 7 == 0) ? 16'sh8000 : 16'($urandom);
        env_q[k] = (i % 7 == 0) ? 16'sh7fff : 16'($urandom);
        cos_i[k] = 16'($urandom);
        sin_i[k] = 16'($urandom);
        case (outsel)
          2'd0: begin
            longint p;
            p = longint'(env_i[k]) * longint'(cos_i[k]) - longint'(env_q[k]) * longint'(sin_i[k]);
            e[k] = sat(p >>> 15);
          end
          2'd1: e[k] = int'(cos_i[k]);
          2'd2: e[k] = int'(env_i[k]);
          default: e[k] = 0;
        endcase
      end
      @(posedge clk); #1;
      for (int k = 0; k < LANES; k++) begin
        checks++;
        if (int'(y[k]) != e[k]) begin
          failures++; $display("FAIL outsel=%0d lane %0d got %0d exp %0d", outsel, k, y[k], e[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
