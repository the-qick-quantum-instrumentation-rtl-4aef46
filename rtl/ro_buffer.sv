// ro_buffer: circular capture buffer of a readout chain.
//
// Every wr_valid stores wr_data at the next location, wrapping after 2^AW
// entries, so the buffer always holds the most recent results in consecutive
// locations, as the paper describes for the averaged values. count is the
// number of entries written since clear, saturating at 2^AW. The host reads
// any location through rd_addr / rd_data (one clock latency), standing in for
// the DMA path. Used twice per readout: averaged IQ pairs and raw decimated
// samples. Depth is this design's choice.
module ro_buffer #(
  parameter int DW = 64,
  parameter int AW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_valid,
  input  logic [DW-1:0] wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  output logic [AW:0]   count
);
  logic [DW-1:0] mem [2**AW];
  logic [AW-1:0] wp;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wp    <= '0;
      count <= '0;
    end else if (wr_valid) begin
      wp <= wp + 1'b1;
      if (count != (AW+1)'(2**AW)) count <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wp] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
