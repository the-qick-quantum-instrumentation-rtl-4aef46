// tb_tproc_regfile: self-checking test of the register file: reset value,
// random writes, all read ports compared with a model.
module tb_tproc_regfile;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, we;
  logic [4:0] raddr [5];
  logic [31:0] rdata [5];
  logic [4:0] waddr;
  logic [31:0] wdata;
  tproc_regfile #(.NREG(32), .W(32), .NRD(5)) dut (.*);

  logic [31:0] model [32];

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
    rst_n = 0; we = 0; waddr = 0; wdata = 0;
    for (int p = 0; p < 5; p++) raddr[p] = 0;
    for (int i = 0; i < 32; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        raddr[p] = 5'($urandom);
        #0;
      end
      #1;
      for (int p = 0; p < 5; p++) chk(rdata[p] == model[raddr[p]], $sformatf("read port %0d", p));
      we = $urandom_range(0, 1);
      waddr = 5'($urandom);
      wdata = $urandom;
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
