// tproc_cond: condition logic of the tProcessor's conditional branch.
//
// Combinational signed comparison of two register values; taken is 1 when
// the branch must be taken. The paper names the block and says readout IQ data
// can drive a conditional branch; the comparison set (qick_pkg::cond_e) is
// this design's choice.
module tproc_cond #(
  parameter int W = 32
) (
  input  qick_pkg::cond_e cond,
  input  logic [W-1:0]    a,
  input  logic [W-1:0]    b,
  output logic            taken
);
  import qick_pkg::*;

  logic signed [W-1:0] sa, sb;
  assign sa = a;
  assign sb = b;

  always_comb begin
    unique case (cond)
      CND_EQ:  taken = (sa == sb);
      CND_NE:  taken = (sa != sb);
      CND_LT:  taken = (sa <  sb);
      CND_GT:  taken = (sa >  sb);
      CND_LE:  taken = (sa <= sb);
      CND_GE:  taken = (sa >= sb);
      default: taken = 1'b0;
    endcase
  end
endmodule
