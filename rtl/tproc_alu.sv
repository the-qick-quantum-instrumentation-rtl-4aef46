// tproc_alu: the "Math / Bitwise" unit of the tProcessor.
//
// Combinational. Performs addition and subtraction and the bitwise operations
// (AND, OR, XOR, NOT, logical and arithmetic shifts) that the paper lists as
// the processor's common operations. The operation set and its encoding
// (qick_pkg::alu_op_e) are this design's choices. Shift amounts use b[4:0].
module tproc_alu #(
  parameter int W = 32
) (
  input  qick_pkg::alu_op_e op,
  input  logic [W-1:0]      a,
  input  logic [W-1:0]      b,
  output logic [W-1:0]      y
);
  import qick_pkg::*;

  always_comb begin
    unique case (op)
      ALU_ADD: y = a + b;
      ALU_SUB: y = a - b;
      ALU_AND: y = a & b;
      ALU_OR:  y = a | b;
      ALU_XOR: y = a ^ b;
      ALU_NOT: y = ~a;
      ALU_SHL: y = a << b[4:0];
      ALU_SHR: y = a >> b[4:0];
      ALU_ASR: y = W'($signed(a) >>> b[4:0]);
      default: y = '0;
    endcase
  end
endmodule
