// tb_tproc_alu: self-checking test of the math / bitwise unit against a
// behavioural model, random operands for every operation.
module tb_tproc_alu;
  import qick_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op;
  logic [31:0] a, b, y;
  tproc_alu #(.W(32)) dut (.*);

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    case (o)
      ALU_ADD: return x + z;
      ALU_SUB: return x - z;
      ALU_AND: return x & z;
      ALU_OR:  return x | z;
      ALU_XOR: return x ^ z;
      ALU_NOT: return ~x;
      ALU_SHL: return x << z[4:0];
      ALU_SHR: return x >> z[4:0];
      ALU_ASR: return 32'($signed(x) >>> z[4:0]);
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
      op = alu_op_e'($urandom_range(0, 8));
      a = $urandom;
      b = (i % 3 == 0) ? 32'($urandom_range(0, 31)) : $urandom;
      #1;
      checks++;
      if (y !== model(op, a, b)) begin
        failures++;
        $display("FAIL op=%0d a=%h b=%h y=%h", op, a, b, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
