// tb_ro_buffer: self-checking test of the circular capture buffer: writes
// wrap around, the last 2^AW entries are readable at their slots, count
// saturates, clear restarts at slot 0.
module tb_ro_buffer;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int AW = 4;
  logic rst_n, clear, wr_valid;
  logic [63:0] wr_data, rd_data;
  logic [AW-1:0] rd_addr;
  logic [AW:0] count;
  ro_buffer #(.DW(64), .AW(AW)) dut (.*);

  logic [63:0] model [2**AW];
  int nw = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; wr_valid = 0; wr_data = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int n;
      n = (round == 1) ? 5 : 37;
      nw = 0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        wr_valid = 1; wr_data = {$urandom, $urandom};
        model[nw % (2**AW)] = wr_data;
        nw++;
        @(posedge clk); #1;
        wr_valid = 0;
        chk(int'(count) == ((nw > 2**AW) ? 2**AW : nw), "count");
      end
      for (int a = 0; a < ((nw < 2**AW) ? nw : 2**AW); a++) begin
        @(negedge clk);
        rd_addr = AW'(a);
        @(posedge clk); #1;
        chk(rd_data == model[a], $sformatf("slot %0d", a));
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      chk(count == 0, "cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
