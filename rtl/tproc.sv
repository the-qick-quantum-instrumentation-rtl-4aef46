// tproc: the timed processor (tProcessor) of the QICK firmware.
//
// A small processor with one extra idea: instructions that carry a time tag
// are not executed in place but pushed, with absolute time t_off + tag, into
// the queue of their output channel. A per-channel time controller releases
// each queued entry when the 48-bit master clock reaches its time. Decoding
// therefore runs ahead of the master clock; it only waits when a channel
// queue is full, on an explicit WAITI (wait for a time) or WAITR (wait for a
// readout result), so the output timeline stays exact however long the
// non-timed code takes.
//
// Blocks, as the paper draws them: start-select mux (host register or external
// start), main control (a two-state fetch/execute machine, so every
// instruction takes two clocks, MEMR three), register file, stack, condition
// logic, math/bitwise unit, the time-offset register t_off, data memory (second
// port to the host), eight queues with their time controllers, and the master
// clock. The program memory sits outside and is read through pmem_addr /
// pmem_data with one clock of latency.
//
// From the paper: 64-bit instructions, 48-bit master clock, eight output
// channels, time offset register cleared at start, stall on a full queue,
// readout IQ values readable by the program for conditional branches. This
// design's own: the instruction encoding (see qick_pkg), register count, queue
// depth, the WAITR/READ feedback scheme and the start mux select.
//
// Interface timing: a start pulse (rising edge of the selected start source)
// in IDLE clears pc, t_off and the master clock; the master clock counts from
// the next clock and keeps counting after END. Channel c's output is a
// valid/ready stream of 160-bit payloads; ro_valid[r] pulses deliver the
// averaged IQ of readout r.
module tproc
  import qick_pkg::*;
#(
  parameter int N_CH        = 8,
  parameter int NRO         = 2,
  parameter int PMEM_AW     = 12,
  parameter int DMEM_AW     = 12,
  parameter int QDEPTH      = 16,
  parameter int STACK_DEPTH = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // start control (Zynq register / external)
  input  logic                host_start,
  input  logic                start_src,
  input  logic                ext_start,
  output logic                running,
  // program memory
  output logic [PMEM_AW-1:0]  pmem_addr,
  input  logic [INSTR_W-1:0]  pmem_data,
  // data memory, host side
  input  logic [DMEM_AW-1:0]  dmem_host_addr,
  input  logic                dmem_host_we,
  input  logic [REG_W-1:0]    dmem_host_wdata,
  output logic [REG_W-1:0]    dmem_host_rdata,
  // readout feedback
  input  logic [NRO-1:0]      ro_valid,
  input  logic [REG_W-1:0]    ro_i [NRO],
  input  logic [REG_W-1:0]    ro_q [NRO],
  // timed output channels
  output logic [N_CH-1:0]      ch_valid,
  input  logic [N_CH-1:0]      ch_ready,
  output payload_t            ch_payload [N_CH],
  // master clock
  output time_t               t_now
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_EXEC, S_MEMR} state_e;
  state_e state;

  logic [PMEM_AW-1:0] pc;
  time_t              t_off;

  // ------------------------------------------------------------ start mux
  logic start_sel, start_q, start_pulse;
  assign start_sel   = start_src ? ext_start : host_start;
  assign start_pulse = start_sel && !start_q;
  always_ff @(posedge clk) begin
    if (!rst_n) start_q <= 1'b0;
    else        start_q <= start_sel;
  end

  // ------------------------------------------------------------ decode
  logic [INSTR_W-1:0] instr;
  opcode_e            opc;
  logic [2:0]         f_ch;
  logic [31:0]        f_imm;
  logic [TTAG_W-1:0]  f_tag;
  assign instr = pmem_data;
  assign opc   = opcode_e'(instr[63:56]);
  assign f_ch  = instr[55:53];
  assign f_imm = instr[31:0];
  assign f_tag = instr[TTAG_W-1:0];

  // ------------------------------------------------------------ register file
  logic [RADDR_W-1:0] rf_raddr [NPAY];
  reg_t               rf_rdata [NPAY];
  logic               rf_we;
  logic [RADDR_W-1:0] rf_waddr;
  reg_t               rf_wdata;

  assign rf_raddr[0] = instr[52:48];
  assign rf_raddr[1] = instr[47:43];
  assign rf_raddr[2] = instr[42:38];
  assign rf_raddr[3] = instr[37:33];
  assign rf_raddr[4] = instr[32:28];

  tproc_regfile #(.NREG(NREG), .W(REG_W), .NRD(NPAY)) u_rf (
    .clk, .rst_n, .raddr(rf_raddr), .rdata(rf_rdata),
    .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata));

  // ------------------------------------------------------------ math / cond
  reg_t alu_y;
  logic cond_taken;
  tproc_alu #(.W(REG_W)) u_alu (
    .op(alu_op_e'(instr[37:34])), .a(rf_rdata[1]),
    .b(opc == OP_MATH ? rf_rdata[2] : f_imm), .y(alu_y));

  tproc_cond #(.W(REG_W)) u_cond (
    .cond(cond_e'(instr[36:34])), .a(rf_rdata[1]), .b(rf_rdata[2]), .taken(cond_taken));

  // ------------------------------------------------------------ stack
  logic st_push, st_pop, st_full, st_empty;
  reg_t st_dout;
  tproc_stack #(.DEPTH(STACK_DEPTH), .W(REG_W)) u_stack (
    .clk, .rst_n, .push(st_push), .din(rf_rdata[1]), .pop(st_pop),
    .dout(st_dout), .full(st_full), .empty(st_empty));

  // ------------------------------------------------------------ data memory
  logic [DMEM_AW-1:0] dm_addr;
  logic               dm_we;
  reg_t               dm_rdata;
  assign dm_addr = DMEM_AW'(rf_rdata[1] + f_imm);
  tproc_mem #(.DW(REG_W), .AW(DMEM_AW)) u_dmem (
    .clk,
    .a_addr(dm_addr), .a_we(dm_we), .a_wdata(rf_rdata[2]), .a_rdata(dm_rdata),
    .b_addr(dmem_host_addr), .b_we(dmem_host_we), .b_wdata(dmem_host_wdata),
    .b_rdata(dmem_host_rdata));

  // ------------------------------------------------------------ master clock
  // The master clock keeps counting after END so that queued entries still
  // play out; it is cleared and restarted by the next start.
  logic mc_clear, mc_en;
  master_clock #(.W(TIME_W)) u_mc (.clk, .rst_n, .clear(mc_clear), .en(mc_en), .t(t_now));

  // ------------------------------------------------------------ readout inputs
  reg_t           ro_i_lat [NRO];
  reg_t           ro_q_lat [NRO];
  logic [NRO-1:0] ro_new;
  logic [NRO-1:0] ro_clear;
  always_ff @(posedge clk) begin
    for (int r = 0; r < NRO; r++) begin
      if (!rst_n) begin
        ro_i_lat[r] <= '0;
        ro_q_lat[r] <= '0;
        ro_new[r]   <= 1'b0;
      end else if (ro_valid[r]) begin
        ro_i_lat[r] <= ro_i[r];
        ro_q_lat[r] <= ro_q[r];
        ro_new[r]   <= 1'b1;
      end else if (ro_clear[r]) begin
        ro_new[r]   <= 1'b0;
      end
    end
  end
  localparam int ROW = (NRO > 1) ? $clog2(NRO) : 1;
  logic [ROW-1:0] f_ro;
  assign f_ro = ROW'(f_ch);
  logic ro_port_ok;
  assign ro_port_ok = (32'(f_ch) < NRO);

  // ------------------------------------------------------------ channel queues
  logic [N_CH-1:0] q_push, q_full, q_empty, q_pop;
  logic [$clog2(QDEPTH+1)-1:0] q_count [N_CH];
  timed_entry_t   q_din;
  timed_entry_t   q_head [N_CH];
  assign q_din.t = t_off + time_t'(f_tag);
  assign q_din.p = {rf_rdata[4], rf_rdata[3], rf_rdata[2], rf_rdata[1], rf_rdata[0]};

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    sync_fifo #(.T(timed_entry_t), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .push(q_push[c]), .din(q_din), .pop(q_pop[c]),
      .dout(q_head[c]), .full(q_full[c]), .empty(q_empty[c]), .count(q_count[c]));
    time_ctrl #(.TIME_W(TIME_W)) u_tc (
      .clk, .rst_n, .t_now, .q_empty(q_empty[c]), .q_head(q_head[c]), .q_pop(q_pop[c]),
      .m_valid(ch_valid[c]), .m_ready(ch_ready[c]), .m_payload(ch_payload[c]));
  end

  // ------------------------------------------------------------ main control
  logic           advance;          // instruction completes this clock
  logic           jump;
  logic [PMEM_AW-1:0] jump_addr;
  logic           stall_full;       // SET blocked by a full queue

  always_comb begin
    advance    = 1'b0;
    jump       = 1'b0;
    jump_addr  = PMEM_AW'(f_imm);
    stall_full = 1'b0;
    rf_we      = 1'b0;
    rf_waddr   = instr[52:48];
    rf_wdata   = alu_y;
    st_push    = 1'b0;
    st_pop     = 1'b0;
    dm_we      = 1'b0;
    q_push     = '0;
    ro_clear   = '0;

    if (state == S_MEMR) begin
      rf_we    = 1'b1;
      rf_wdata = dm_rdata;
      advance  = 1'b1;
    end else if (state == S_EXEC) begin
      unique case (opc)
        OP_REGWI:  begin rf_we = 1'b1; rf_wdata = f_imm; advance = 1'b1; end
        OP_MATH,
        OP_MATHI:  begin rf_we = 1'b1; rf_wdata = alu_y; advance = 1'b1; end
        OP_MEMR:   ;                          // completes in S_MEMR
        OP_MEMW:   begin dm_we = 1'b1; advance = 1'b1; end
        OP_JUMP:   begin jump = 1'b1; advance = 1'b1; end
        OP_CONDJ:  begin jump = cond_taken; advance = 1'b1; end
        OP_LOOPNZ: begin
          advance = 1'b1;
          if (rf_rdata[0] != '0) begin
            jump     = 1'b1;
            rf_we    = 1'b1;
            rf_wdata = rf_rdata[0] - 1'b1;
          end
        end
        OP_PUSH:   begin st_push = 1'b1; advance = 1'b1; end
        OP_POP:    begin st_pop = 1'b1; rf_we = 1'b1; rf_wdata = st_dout; advance = 1'b1; end
        OP_SET: begin
          if (q_full[f_ch]) stall_full = 1'b1;
          else begin q_push[f_ch] = 1'b1; advance = 1'b1; end
        end
        OP_SYNCI:  advance = 1'b1;
        OP_WAITI:  advance = (t_now >= t_off + time_t'(f_imm));
        OP_READ: begin
          advance = 1'b1;
          rf_we   = 1'b1;
          if (ro_port_ok) begin
            rf_wdata = f_imm[0] ? ro_q_lat[f_ro] : ro_i_lat[f_ro];
            ro_clear[f_ro] = 1'b1;
          end else begin
            rf_wdata = '0;
          end
        end
        OP_WAITR:  advance = !ro_port_ok || ro_new[f_ro];
        OP_END:    ;
        default:   advance = 1'b1;            // NOP and unknown opcodes
      endcase
    end
  end

  assign pmem_addr = pc;
  assign mc_clear  = (state == S_IDLE) && start_pulse;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      t_off   <= '0;
      running <= 1'b0;
      mc_en   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start_pulse) begin
          pc      <= '0;
          t_off   <= '0;
          running <= 1'b1;
          mc_en   <= 1'b1;
          state   <= S_FETCH;
        end
        S_FETCH: state <= S_EXEC;
        S_EXEC: begin
          if (opc == OP_END) begin
            running <= 1'b0;
            state   <= S_IDLE;
          end else if (opc == OP_MEMR) begin
            state <= S_MEMR;
          end else if (advance) begin
            pc    <= jump ? jump_addr : pc + 1'b1;
            state <= S_FETCH;
          end
          if (opc == OP_SYNCI) t_off <= t_off + time_t'(f_imm);
        end
        S_MEMR: begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A queue never holds more than its depth; a blocked SET never completes;
  // the program never pushes onto a full stack.
  for (genvar c = 0; c < N_CH; c++) begin : g_qchk
    assert property (@(posedge clk) disable iff (!rst_n) 32'(q_count[c]) <= QDEPTH)
      else $error("tproc: queue %0d overflow", c);
  end
  assert property (@(posedge clk) disable iff (!rst_n) stall_full |-> !advance)
    else $error("tproc: SET completed into a full queue");
  assert property (@(posedge clk) disable iff (!rst_n) st_push && !st_pop |-> !st_full)
    else $error("tproc: stack overflow");
  assert property (@(posedge clk) disable iff (!rst_n) st_pop |-> !st_empty)
    else $error("tproc: pop from an empty stack");

  // Handshake rule of the channel streams: a valid payload is held until taken.
  for (genvar c = 0; c < N_CH; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     ch_valid[c] && !ch_ready[c] |=> ch_valid[c])
      else $error("tproc: channel %0d dropped valid", c);
  end
endmodule
