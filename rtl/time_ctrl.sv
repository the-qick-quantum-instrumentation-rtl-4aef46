// time_ctrl: timed-instruction control of one tProcessor output channel.
//
// Watches the head of its channel queue and, when the master clock reaches
// the entry's time tag, pops it and presents its payload on a valid/ready
// output stream to the signal generator (or the I/O block). The paper gives
// the function: queued instructions are executed when the time arrives, and a
// time that has already arrived (e.g. 0) plays immediately. The >= comparison
// and the single registered output stage are this design's choices.
//
// Timing: if the head's time T is already in the queue, m_valid rises in the
// clock after t_now reaches T (one register stage). m_valid stays high until
// m_ready.
module time_ctrl #(
  parameter int TIME_W = 48
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [TIME_W-1:0]      t_now,
  input  logic                   q_empty,
  input  qick_pkg::timed_entry_t q_head,
  output logic                   q_pop,
  output logic                   m_valid,
  input  logic                   m_ready,
  output qick_pkg::payload_t     m_payload
);
  logic due;
  assign due   = !q_empty && (t_now >= q_head.t);
  assign q_pop = due && (!m_valid || m_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_valid   <= 1'b0;
      m_payload <= '0;
    end else if (q_pop) begin
      m_valid   <= 1'b1;
      m_payload <= q_head.p;
    end else if (m_ready) begin
      m_valid   <= 1'b0;
    end
  end

  // A held output must not change until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_valid && !m_ready |=> m_valid && $stable(m_payload))
    else $error("time_ctrl: output dropped before ready");
endmodule
