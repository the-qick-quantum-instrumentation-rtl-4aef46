// tb_time_ctrl: self-checking test of a timed-instruction controller fed by a
// queue. Entries with increasing time tags (and one already late) must leave
// in the clock after the master clock reaches their tag, in order, with
// their payload; a stalled ready must hold the output.
module tb_time_ctrl;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  time_t t_now;
  logic push, q_full, q_empty, q_pop, m_valid, m_ready;
  timed_entry_t din, q_head;
  payload_t m_payload;

  sync_fifo #(.T(timed_entry_t), .DEPTH(8)) u_q (
    .clk, .rst_n, .push, .din, .pop(q_pop), .dout(q_head), .full(q_full), .empty(q_empty), .count());
  time_ctrl #(.TIME_W(48)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always_ff @(posedge clk) begin
    if (!rst_n) t_now <= '0;
    else        t_now <= t_now + 1'b1;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected (time, payload) pairs
  longint unsigned exp_t [6] = '{40, 0, 41, 60, 60, 100};
  int nrecv = 0;
  longint unsigned prev_t = 0;
  int stall_seen = 0;
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      longint unsigned want_t;
      // an entry is popped once t_now >= tag and it is at the head (one per
      // clock); valid shows in the following clock
      want_t = exp_t[nrecv] + 1;
      if (want_t < prev_t + 1) want_t = prev_t + 1;
      chk(m_payload.r[0] == 32'(nrecv), $sformatf("payload order %0d got %0d", nrecv, m_payload.r[0]));
      if (nrecv != 4) chk(t_now == 48'(want_t), $sformatf("release time entry %0d at %0d", nrecv, t_now));
      prev_t = t_now;
      nrecv++;
    end
  end

  initial begin
    rst_n = 0; push = 0; din = '0; m_ready = 1;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    repeat (15) @(negedge clk);
    // t_now is ~16 now; push 6 entries (entry 1 has tag 0: already late)
    for (int i = 0; i < 6; i++) begin
      din.t = 48'(exp_t[i]);
      din.p = '0;
      din.p.r[0] = 32'(i);
      push = 1;
      @(negedge clk);
    end
    push = 0;
    // entry 1 (tag 0) is blocked behind entry 0 (tag 40): both leave near 40.
    // Entries 3 and 4 share tag 60: stall ready when the first is out.
    wait (t_now == 48'd62);
    @(negedge clk);
    m_ready = 0;
    repeat (3) begin
      @(negedge clk);
      chk(m_valid, "held while not ready");
      stall_seen++;
    end
    m_ready = 1;
    wait (t_now == 48'd150);
    chk(nrecv == 6, $sformatf("all entries released (%0d)", nrecv));
    chk(stall_seen == 3, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
