// tb_dig_io: self-checking test of the marker block: outputs take the low
// 16 bits of each payload, a rising edge on bit r gives one trigger pulse to
// readout r, levels hold between payloads.
module tb_dig_io;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, s_valid, s_ready;
  payload_t s_payload;
  logic [15:0] dout;
  logic [1:0] ro_trig;
  dig_io #(.DOUT_W(16), .NRO(2)) dut (.*);

  logic [15:0] model;
  int ntrig = 0;

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
    rst_n = 0; s_valid = 0; s_payload = '0; model = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      logic [15:0] prev;
      @(negedge clk);
      chk(s_ready, "always ready");
      s_valid = $urandom_range(0, 2) == 0;
      s_payload = '0;
      s_payload.r[0] = $urandom;
      prev = model;
      @(posedge clk); #1;
      if (s_valid) model = s_payload.r[0][15:0];
      chk(dout == model, "marker levels");
      chk(ro_trig == (s_valid ? (model[1:0] & ~prev[1:0]) : 2'b00), "trigger pulses");
      if (ro_trig != 0) ntrig++;
      s_valid = 0;
    end
    chk(ntrig > 10, "triggers exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
