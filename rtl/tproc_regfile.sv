// tproc_regfile: general-purpose register file of the tProcessor.
//
// NREG registers of W bits, NRD combinational read ports and one write port.
// Five read ports let the main control gather the five registers of a timed
// payload in one clock. The paper only names the register file; its size and
// port count are this design's choices. Reset clears every register.
//
// Timing: reads are combinational; a write lands at the clock edge.
module tproc_regfile #(
  parameter int NREG = 32,
  parameter int W    = 32,
  parameter int NRD  = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREG)-1:0]  raddr [NRD],
  output logic [W-1:0]             rdata [NRD],
  input  logic                     we,
  input  logic [$clog2(NREG)-1:0]  waddr,
  input  logic [W-1:0]             wdata
);
  logic [W-1:0] regs [NREG];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < NRD; i++) rdata[i] = regs[raddr[i]];
  end
endmodule
