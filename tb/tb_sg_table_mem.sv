// tb_sg_table_mem: self-checking test of the envelope table: per-lane writes,
// word reads with one clock latency, I in the low and Q in the high half.
module tb_sg_table_mem;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int LANES = 16, AW = 5;
  logic wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [3:0] wr_lane;
  logic [31:0] wr_data;
  sample_t rd_i [LANES], rd_q [LANES];
  sg_table_mem #(.LANES(LANES), .AW(AW)) dut (.*);

  logic [31:0] model [2**AW][LANES];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; rd_addr = 0; wr_lane = 0; wr_data = 0;
    for (int a = 0; a < 2**AW; a++)
      for (int k = 0; k < LANES; k++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = AW'(a); wr_lane = 4'(k); wr_data = $urandom;
        model[a][k] = wr_data;
      end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 100; i++) begin
      int a;
      a = $urandom_range(0, 2**AW-1);
      rd_addr = AW'(a);
      @(posedge clk); #1;
      for (int k = 0; k < LANES; k++) begin
        checks++;
        if ({rd_q[k], rd_i[k]} !== model[a][k]) begin
          failures++; $display("FAIL word %0d lane %0d", a, k);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
