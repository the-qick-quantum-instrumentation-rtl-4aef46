// tb_tproc_mem: self-checking test of the dual-port RAM used as program and
// data memory. Writes through both ports, reads back through the other port
// and checks the one-clock read latency.
module tb_tproc_mem;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DW = 64, AW = 6;
  logic [AW-1:0] a_addr, b_addr;
  logic a_we, b_we;
  logic [DW-1:0] a_wdata, b_wdata, a_rdata, b_rdata;
  tproc_mem #(.DW(DW), .AW(AW)) dut (.*);

  logic [DW-1:0] model [2**AW];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // Fill: even addresses through A, odd through B.
    for (int i = 0; i < 2**AW; i += 2) begin
      @(negedge clk);
      a_we = 1; a_addr = AW'(i);   a_wdata = {$urandom, $urandom}; model[i]   = a_wdata;
      b_we = 1; b_addr = AW'(i+1); b_wdata = {$urandom, $urandom}; model[i+1] = b_wdata;
    end
    @(negedge clk);
    a_we = 0; b_we = 0;
    for (int i = 0; i < 200; i++) begin
      int x, y;
      x = $urandom_range(0, 2**AW-1);
      y = $urandom_range(0, 2**AW-1);
      @(negedge clk);
      a_addr = AW'(x); b_addr = AW'(y);
      @(posedge clk); #1;
      chk(a_rdata == model[x], "port A read");
      chk(b_rdata == model[y], "port B read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
