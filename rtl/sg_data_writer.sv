// sg_data_writer: loads pulse envelopes into a signal generator's table.
//
// The host first writes the start sample address into a register (cfg_we /
// cfg_addr), then streams samples {Q, I} (s_valid / s_data, e.g. from a DMA
// engine). Each sample goes to word addr/LANES, lane addr%LANES of the
// table, and the address advances by one. The paper names the register block
// and the data writer and says envelopes come from the host by DMA; the
// per-sample addressing is this design's choice.
// Timing: the table write for a sample happens one clock after it arrives.
module sg_data_writer
  import qick_pkg::*;
#(
  parameter int LANES = 16,
  parameter int AW    = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  logic [AW+$clog2(LANES)-1:0] cfg_addr,
  input  logic                        s_valid,
  input  logic [2*SAMPLE_W-1:0]       s_data,
  output logic                        mem_we,
  output logic [AW-1:0]               mem_addr,
  output logic [$clog2(LANES)-1:0]    mem_lane,
  output logic [2*SAMPLE_W-1:0]       mem_data
);
  localparam int LW = $clog2(LANES);
  logic [AW+LW-1:0] ptr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr      <= '0;
      mem_we   <= 1'b0;
      mem_addr <= '0;
      mem_lane <= '0;
      mem_data <= '0;
    end else begin
      mem_we <= 1'b0;
      if (cfg_we) begin
        ptr <= cfg_addr;
      end else if (s_valid) begin
        mem_we   <= 1'b1;
        mem_addr <= ptr[AW+LW-1:LW];
        mem_lane <= ptr[LW-1:0];
        mem_data <= s_data;
        ptr      <= ptr + 1'b1;
      end
    end
  end
endmodule
