// sg_table_mem: envelope table of a signal generator.
//
// Each word holds LANES consecutive complex envelope samples, 16-bit I and
// 16-bit Q each, so one read per clock feeds all DAC lanes. It is written one
// sample at a time (lane select) by the data writer and read a word at a time
// by the generator. The paper says the table is in block RAM and holds
// interleaved 16-bit I and Q words; the depth (2^AW words) is this design's
// choice. Timing: rd_i/rd_q show word rd_addr one clock after it is given.
module sg_table_mem
  import qick_pkg::*;
#(
  parameter int LANES = 16,
  parameter int AW    = 12
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic [$clog2(LANES)-1:0] wr_lane,
  input  logic [2*SAMPLE_W-1:0]    wr_data,   // {Q, I}
  input  logic [AW-1:0]            rd_addr,
  output sample_t                  rd_i [LANES],
  output sample_t                  rd_q [LANES]
);
  for (genvar k = 0; k < LANES; k++) begin : g_lane
    logic [2*SAMPLE_W-1:0] mem [2**AW];
    logic [2*SAMPLE_W-1:0] q;
    always_ff @(posedge clk) begin
      if (wr_en && wr_lane == k) mem[wr_addr] <= wr_data;
      q <= mem[rd_addr];
    end
    assign rd_i[k] = q[SAMPLE_W-1:0];
    assign rd_q[k] = q[2*SAMPLE_W-1:SAMPLE_W];
  end
endmodule
