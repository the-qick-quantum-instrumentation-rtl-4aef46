// tb_tproc_stack: self-checking test of the LIFO stack against a queue model
// (push, pop, push+pop, full and empty).
module tb_tproc_stack;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 4;
  logic rst_n, push, pop, full, empty;
  logic [31:0] din, dout;
  tproc_stack #(.DEPTH(DEPTH), .W(32)) dut (.*);

  logic [31:0] model [$];

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
    rst_n = 0; push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty");
      chk(full == (model.size() == DEPTH), "full");
      if (model.size() > 0) chk(dout == model[$], "top");
      push = $urandom_range(0, 1) && (model.size() < DEPTH || model.size() > 0);
      pop  = $urandom_range(0, 1) && model.size() > 0;
      if (push && !pop && model.size() == DEPTH) push = 0;
      din = $urandom;
      @(posedge clk); #1;
      if (push && pop) model[$] = din;
      else if (push) model.push_back(din);
      else if (pop) void'(model.pop_back());
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
