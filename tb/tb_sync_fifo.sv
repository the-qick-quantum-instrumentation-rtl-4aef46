// tb_sync_fifo: self-checking test of the first-word-fall-through FIFO.
// Random pushes and pops (never on full / empty) are compared with a queue
// model: data order, count, full and empty flags, and one-clock visibility.
module tb_sync_fifo;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 4;
  logic rst_n, push, pop, full, empty;
  logic [7:0] din, dout;
  logic [2:0] count;

  sync_fifo #(.T(logic [7:0]), .DEPTH(DEPTH)) dut (.*);

  logic [7:0] model [$];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty flag");
      chk(full == (model.size() == DEPTH), "full flag");
      chk(int'(count) == model.size(), "count");
      if (model.size() > 0) chk(dout == model[0], $sformatf("head %0h vs %0h", dout, model[0]));
      push = ($urandom_range(0, 99) < 55) && (model.size() < DEPTH);
      pop  = ($urandom_range(0, 99) < 45) && (model.size() > 0);
      din  = 8'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
