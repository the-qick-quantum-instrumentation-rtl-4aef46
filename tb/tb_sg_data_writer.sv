// tb_sg_data_writer: self-checking test of the envelope data writer. After a
// start address is set, each streamed sample must produce one table write to
// word addr/16, lane addr%16 with the same data, addresses auto-incrementing.
module tb_sg_data_writer;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, cfg_we, s_valid, mem_we;
  logic [15:0] cfg_addr;
  logic [31:0] s_data, mem_data;
  logic [11:0] mem_addr;
  logic [3:0] mem_lane;
  sg_data_writer #(.LANES(16), .AW(12)) dut (.*);

  int exp_addr;
  logic [31:0] exp_data [$];
  int nwr = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) begin
    if (rst_n && mem_we) begin
      chk({mem_addr, mem_lane} == 16'(exp_addr), $sformatf("address %0h exp %0h", {mem_addr, mem_lane}, exp_addr));
      chk(mem_data == exp_data.pop_front(), "data");
      exp_addr++;
      nwr++;
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; cfg_we = 0; cfg_addr = 0; s_valid = 0; s_data = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 3; blk++) begin
      int start;
      start = $urandom_range(0, 65000);
      @(negedge clk);
      cfg_we = 1; cfg_addr = 16'(start);
      @(negedge clk);
      cfg_we = 0;
      exp_addr = start;
      for (int i = 0; i < 100; i++) begin
        s_valid = $urandom_range(0, 3) != 0;
        s_data = $urandom;
        if (s_valid) exp_data.push_back(s_data);
        @(negedge clk);
      end
      s_valid = 0;
      repeat (3) @(negedge clk);
      chk(exp_data.size() == 0, "all samples written");
    end
    chk(nwr > 200, "writes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
