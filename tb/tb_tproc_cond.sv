// tb_tproc_cond: self-checking test of the branch condition logic: signed
// comparisons on random and equal operands.
module tb_tproc_cond;
  import qick_pkg::*;
  int checks = 0, failures = 0;
  cond_e cond;
  logic [31:0] a, b;
  logic taken;
  tproc_cond #(.W(32)) dut (.*);

  function automatic bit model(cond_e c, int x, int z);
    case (c)
      CND_EQ: return x == z;
      CND_NE: return x != z;
      CND_LT: return x <  z;
      CND_GT: return x >  z;
      CND_LE: return x <= z;
      CND_GE: return x >= z;
      default: return 0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      cond = cond_e'($urandom_range(0, 5));
      a = (i % 4 == 0) ? 32'($urandom_range(0, 3)) - 32'd1 : $urandom;
      b = (i % 5 == 0) ? a : ((i % 4 == 0) ? 32'($urandom_range(0, 3)) - 32'd1 : $urandom);
      #1;
      checks++;
      if (taken !== model(cond, int'(a), int'(b))) begin
        failures++;
        $display("FAIL cond=%0d a=%h b=%h", cond, a, b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
