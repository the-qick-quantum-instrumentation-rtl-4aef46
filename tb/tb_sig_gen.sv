// tb_sig_gen: self-checking test of a signal generator (and its sequencer).
//
// Uploads a random envelope, then queues pulses that exercise every outsel
// value, back-to-back pulses, one-shot and periodic mode, stdsel hold / zero
// and phase coherence (two pulses of the same frequency far apart must both lie
// on the sine referred to master time 0). Every DAC sample of every clock is
// compared with a model computed here: the expected start of each pulse is
// 20 clocks after it is queued into an idle generator, or the end of the
// previous pulse (periodic pulses end at a period boundary).
module tb_sig_gen;
  import qick_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int L = 16;
  localparam int NCLK = 1500;
  logic rst_n;
  time_t t_now;
  logic s_valid, s_ready, wr_cfg_we, wr_valid;
  payload_t s_payload;
  logic [15:0] wr_cfg_addr;
  logic [31:0] wr_data;
  sample_t dac_data [L];

  sig_gen #(.LANES(L), .AW(12), .QDEPTH(16)) dut (.*);

  always_ff @(posedge clk) begin
    if (!rst_n) t_now <= '0;
    else        t_now <= t_now + 1'b1;
  end

  // envelope
  localparam int NW = 64;
  logic [31:0] env [NW][L];

  // pulses
  typedef struct {
    sg_cmd_t c;
    int      arrive;
    int      start;
    int      stop;     // first clock after the pulse (periods included)
  } pulse_t;
  pulse_t pl [$];

  // recorded output
  int rec [NCLK][L];

  function automatic int rsin(logic [31:0] ph, bit c);
    real v;
    int idx;
    idx = int'(ph[31:22]);
    if (c) idx = (idx + 256) % 1024;
    v = 32767.0 * $sin(2.0 * 3.14159265358979323846 * real'(idx) / 1024.0);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction
  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  function automatic int expv(sg_cmd_t c, int w, int k, int tt);
    longint ei, eq, co, si, m;
    logic [31:0] ph;
    ei = longint'($signed(env[(int'(c.addr) + w) % NW][k][15:0]));
    eq = longint'($signed(env[(int'(c.addr) + w) % NW][k][31:16]));
    ph = c.phase + c.freq * (32'(tt) * 32'(L) + 32'(k));
    co = rsin(ph, 1);
    si = rsin(ph, 0);
    case (c.outsel)
      2'd0: m = sat((ei * co - eq * si) >>> 15);
      2'd1: m = co;
      2'd2: m = ei;
      default: m = 0;
    endcase
    return sat((m * longint'(c.gain)) >>> 15);
  endfunction

  task automatic send(sg_cmd_t c);
    payload_t p;
    p.r[0] = c.freq;
    p.r[1] = c.phase;
    p.r[2] = {16'd0, c.addr};
    p.r[3] = {16'd0, c.gain};
    p.r[4] = {12'd0, c.stdsel, c.mode, c.outsel, c.nsamp};
    @(negedge clk);
    s_valid = 1; s_payload = p;
    @(posedge clk);
    pl.push_back('{c: c, arrive: int'(t_now), start: 0, stop: 0});
    #1 s_valid = 0;
  endtask

  initial begin
    repeat (NCLK + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && t_now < NCLK) for (int k = 0; k < L; k++) rec[t_now][k] = int'(dac_data[k]);

  int first_nz = -1;
  initial begin
    sg_cmd_t c;
    logic [31:0] f1;
    rst_n = 0; s_valid = 0; s_payload = '0; wr_cfg_we = 0; wr_cfg_addr = 0; wr_valid = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // upload envelope
    wr_cfg_we = 1; wr_cfg_addr = 0;
    @(negedge clk); wr_cfg_we = 0;
    for (int w = 0; w < NW; w++)
      for (int k = 0; k < L; k++) begin
        env[w][k] = $urandom;
        if (w == 2 && k == 0) env[w][k][15:0] = 16'd1234;   // non-zero first sample
        wr_valid = 1; wr_data = env[w][k];
        @(negedge clk);
      end
    wr_valid = 0;
    f1 = $urandom;
    // A: envelope only, hold last value; B: mixed, back-to-back, zero after
    c = '{freq: 0, phase: 0, addr: 2, gain: 16'sh7fff, nsamp: 4, outsel: 2, mode: 0, stdsel: 0};
    send(c);
    c = '{freq: f1, phase: 32'h1234_5678, addr: 10, gain: 16'sh6000, nsamp: 6, outsel: 0, mode: 0, stdsel: 1};
    send(c);
    repeat (40) @(negedge clk);
    // C: DDS only at the same frequency and phase, much later (coherence)
    c = '{freq: f1, phase: 32'h1234_5678, addr: 0, gain: 16'sh7fff, nsamp: 3, outsel: 1, mode: 0, stdsel: 0};
    send(c);
    repeat (40) @(negedge clk);
    // D: periodic envelope, then E (zero output) replaces it at a period end
    c = '{freq: 0, phase: 0, addr: 20, gain: 16'sh4000, nsamp: 3, outsel: 2, mode: 1, stdsel: 0};
    send(c);
    repeat (30) @(negedge clk);
    c = '{freq: 32'h0100_0000, phase: 0, addr: 30, gain: 16'sh7fff, nsamp: 2, outsel: 3, mode: 0, stdsel: 1};
    send(c);
    repeat (40) @(negedge clk);
    // F: two-word one-shot with stdsel = 1 to check the zero after a hold
    c = '{freq: 32'h0300_0000, phase: 32'h4000_0000, addr: 40, gain: 16'sh5000, nsamp: 2, outsel: 0, mode: 0, stdsel: 1};
    send(c);
    repeat (40) @(negedge clk);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    int base, prev_stop, hold, zero_after, t0, t1, periods;
    // schedule
    prev_stop = 0;
    for (int i = 0; i < pl.size(); i++) begin
      int s, len;
      len = (pl[i].c.nsamp == 0) ? 1 : int'(pl[i].c.nsamp);
      s = pl[i].arrive + SG_LATENCY;
      if (i > 0) begin
        int b, plen;
        plen = (pl[i-1].c.nsamp == 0) ? 1 : int'(pl[i-1].c.nsamp);
        b = pl[i-1].start + plen;
        if (pl[i-1].c.mode) while (b < s) b += plen;
        if (b > s) s = b;
        pl[i-1].stop = (pl[i-1].c.mode) ? s : pl[i-1].start + plen;
        if (pl[i-1].c.mode == 0 && pl[i-1].stop > s) pl[i-1].stop = s;
      end
      pl[i].start = s;
      pl[i].stop  = s + len;
    end
    // latency of the first pulse (queued into an idle generator)
    checks++;
    if (rec[pl[0].arrive + SG_LATENCY - 1][0] != 0 || rec[pl[0].arrive + SG_LATENCY][0] == 0) begin
      failures++; $display("FAIL first pulse latency is not %0d clocks", SG_LATENCY);
    end
    // every clock from the first arrival to the end
    for (int tt = pl[0].arrive; tt < int'(t_now) && tt < NCLK; tt++) begin
      int cur, exp_k [L], tol;
      cur = -1;
      for (int i = 0; i < pl.size(); i++) if (tt >= pl[i].start && tt < pl[i].stop) cur = i;
      if (cur >= 0) begin
        int len, w;
        len = (pl[cur].c.nsamp == 0) ? 1 : int'(pl[cur].c.nsamp);
        w = (tt - pl[cur].start) % len;
        for (int k = 0; k < L; k++) exp_k[k] = expv(pl[cur].c, w, k, tt);
        tol = (pl[cur].c.outsel <= 1) ? 3 : 0;
      end else begin
        // idle: last pulse that ended before tt
        int last;
        last = -1;
        for (int i = 0; i < pl.size(); i++) if (pl[i].stop <= tt) last = i;
        for (int k = 0; k < L; k++) begin
          if (last < 0 || pl[last].c.stdsel) exp_k[k] = 0;
          else begin
            int len;
            len = (pl[last].c.nsamp == 0) ? 1 : int'(pl[last].c.nsamp);
            exp_k[k] = expv(pl[last].c, (pl[last].stop - 1 - pl[last].start) % len, L-1, pl[last].stop - 1);
          end
        end
        tol = 3;
      end
      for (int k = 0; k < L; k++) begin
        checks++;
        if (rec[tt][k] - exp_k[k] > tol || exp_k[k] - rec[tt][k] > tol) begin
          failures++;
          if (failures < 20) $display("FAIL t=%0d lane %0d got %0d exp %0d (pulse %0d)", tt, k, rec[tt][k], exp_k[k], cur);
        end
      end
    end
    // the periodic pulse must have repeated at least twice
    periods = (pl[3].stop - pl[3].start) / 3;
    checks++;
    if (periods < 2) begin failures++; $display("FAIL periodic pulse repeated %0d times", periods); end
    $display("pulse starts: %0d %0d %0d %0d %0d %0d, periodic repeats %0d",
             pl[0].start, pl[1].start, pl[2].start, pl[3].start, pl[4].start, pl[5].start, periods);
  endtask
endmodule
