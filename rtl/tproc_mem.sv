// tproc_mem: true dual-port synchronous RAM.
//
// Serves as the tProcessor's program memory (64-bit words) and data memory
// (32-bit words). Port A belongs to the processor, port B to the host (the
// single-access AXI path and the DMA path of the firmware both land here).
// The paper names both memories and says the host reaches the data memory by
// single AXI accesses or DMA; widths other than the 64-bit instruction and
// all depths are this design's choices.
//
// Timing: each port reads synchronously, rdata shows mem[addr] one clock after
// addr is presented (read-before-write when the same port writes).
module tproc_mem #(
  parameter int DW = 64,
  parameter int AW = 12
) (
  input  logic          clk,
  input  logic [AW-1:0] a_addr,
  input  logic          a_we,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  input  logic [AW-1:0] b_addr,
  input  logic          b_we,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_rdata <= mem[b_addr];
  end
endmodule
