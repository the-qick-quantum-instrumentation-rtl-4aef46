// qick_pkg: types and constants shared by the QICK firmware blocks.
//
// The firmware is a timed processor (tProcessor) that dispatches time-tagged
// commands into per-channel queues, signal generators that play pulse
// envelopes mixed with a phase-coherent DDS tone, and readout chains that
// downconvert, filter, decimate and average ADC samples. Everything runs in
// one fabric clock domain; a DAC receives 16 samples and an ADC delivers 8
// samples per fabric clock.
//
// Taken from the paper: 64-bit instructions, the 48-bit master clock, eight
// tProcessor output channels, 16 DAC lanes / 8 ADC lanes, 32-bit DDS phase,
// 16-bit I/Q samples, decimation by 8, the 20-clock signal generator latency,
// and the meaning of the mode / stdsel / outsel fields. The instruction
// encoding, register count, payload layout and all memory depths are this
// design's own choices.
package qick_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int TIME_W     = 48;   // master clock counter width
  localparam int INSTR_W    = 64;   // instruction word
  localparam int NCH        = 8;    // tProcessor output channels
  localparam int REG_W      = 32;   // general-purpose register width
  localparam int NREG       = 32;   // number of registers
  localparam int RADDR_W    = $clog2(NREG);
  localparam int NPAY       = 5;    // registers gathered into one timed payload
  localparam int TTAG_W     = 28;   // time-tag field of a timed instruction

  localparam int SAMPLE_W   = 16;   // DAC / ADC / envelope sample width
  localparam int PHASE_W    = 32;   // DDS phase resolution
  localparam int SG_LANES   = 16;   // DAC samples per fabric clock
  localparam int RO_LANES   = 8;    // ADC samples per fabric clock
  localparam int RO_DECIM   = 8;    // readout decimation factor
  localparam int SG_LATENCY = 20;   // queue-empty push to first output sample

  typedef logic [TIME_W-1:0]  time_t;
  typedef logic [REG_W-1:0]   reg_t;
  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Five registers form the payload of a timed instruction.
  typedef struct packed {
    reg_t [NPAY-1:0] r;   // r[0] = ra ... r[4] = re
  } payload_t;

  // Entry of a per-channel timed-instruction queue.
  typedef struct packed {
    time_t    t;
    payload_t p;
  } timed_entry_t;

  // Signal generator command, decoded from a payload:
  //   ra = freq, rb = phase, rc[15:0] = table start address (words),
  //   rd[15:0] = gain (signed Q1.15),
  //   re[15:0] = length in clocks, re[17:16] = outsel, re[18] = mode,
  //   re[19] = stdsel.
  typedef struct packed {
    logic [PHASE_W-1:0] freq;
    logic [PHASE_W-1:0] phase;
    logic [15:0]        addr;
    logic signed [15:0] gain;
    logic [15:0]        nsamp;
    logic [1:0]         outsel;
    logic               mode;
    logic               stdsel;
  } sg_cmd_t;

  function automatic sg_cmd_t decode_sg(payload_t p);
    sg_cmd_t c;
    c.freq   = p.r[0];
    c.phase  = p.r[1];
    c.addr   = p.r[2][15:0];
    c.gain   = p.r[3][15:0];
    c.nsamp  = p.r[4][15:0];
    c.outsel = p.r[4][17:16];
    c.mode   = p.r[4][18];
    c.stdsel = p.r[4][19];
    return c;
  endfunction

  // ---------------------------------------------------------------- ISA
  // Field layout of a 64-bit instruction:
  //   [63:56] opcode
  //   [55:53] channel / readout port (SET, READ, WAITR)
  //   [52:48] rd  (or ra of SET)
  //   [47:43] rs1 (or rb of SET)
  //   [42:38] rs2 (or rc of SET)
  //   [37:34] alu op / condition   ([37:33] rd of SET)
  //   [32:28] re of SET
  //   [31:0]  immediate            ([27:0] time tag of SET)
  typedef enum logic [7:0] {
    OP_NOP    = 8'h00,
    OP_REGWI  = 8'h01,  // rd = imm
    OP_MATH   = 8'h02,  // rd = rs1 op rs2
    OP_MATHI  = 8'h03,  // rd = rs1 op imm
    OP_MEMR   = 8'h04,  // rd = dmem[rs1 + imm]
    OP_MEMW   = 8'h05,  // dmem[rs1 + imm] = rs2
    OP_JUMP   = 8'h06,  // pc = imm
    OP_CONDJ  = 8'h07,  // if (rs1 cond rs2) pc = imm
    OP_LOOPNZ = 8'h08,  // if (rd != 0) { rd = rd - 1; pc = imm }
    OP_PUSH   = 8'h09,  // stack <= rs1
    OP_POP    = 8'h0A,  // rd <= stack
    OP_SET    = 8'h0B,  // queue {ra..re} on channel at t_off + tag
    OP_SYNCI  = 8'h0C,  // t_off += imm
    OP_WAITI  = 8'h0D,  // wait until master clock >= t_off + imm
    OP_READ   = 8'h0E,  // rd = readout[port].I (imm[0]=0) or .Q (imm[0]=1)
    OP_WAITR  = 8'h0F,  // wait for a new result on readout[port]
    OP_END    = 8'h3F   // stop
  } opcode_e;

  typedef enum logic [3:0] {
    ALU_ADD = 4'd0, ALU_SUB = 4'd1, ALU_AND = 4'd2, ALU_OR  = 4'd3,
    ALU_XOR = 4'd4, ALU_NOT = 4'd5, ALU_SHL = 4'd6, ALU_SHR = 4'd7,
    ALU_ASR = 4'd8
  } alu_op_e;

  typedef enum logic [2:0] {
    CND_EQ = 3'd0, CND_NE = 3'd1, CND_LT = 3'd2, CND_GT = 3'd3,
    CND_LE = 3'd4, CND_GE = 3'd5
  } cond_e;

  // Instruction builders, used by testbenches and by anyone assembling a
  // program by hand.
  typedef logic [RADDR_W-1:0] ridx_t;   // register index
  typedef logic [2:0]         chan_t;   // channel / readout port
  function automatic logic [63:0] i_regwi(ridx_t rd, logic [31:0] imm);
    return {OP_REGWI, 3'd0, 5'(rd), 16'd0, imm};
  endfunction
  function automatic logic [63:0] i_math(alu_op_e op, ridx_t rd, ridx_t rs1, ridx_t rs2);
    return {OP_MATH, 3'd0, 5'(rd), 5'(rs1), 5'(rs2), op, 34'd0};
  endfunction
  function automatic logic [63:0] i_mathi(alu_op_e op, ridx_t rd, ridx_t rs1, logic [31:0] imm);
    return {OP_MATHI, 3'd0, 5'(rd), 5'(rs1), 5'd0, op, 2'd0, imm};
  endfunction
  function automatic logic [63:0] i_memr(ridx_t rd, ridx_t rs1, logic [31:0] imm);
    return {OP_MEMR, 3'd0, 5'(rd), 5'(rs1), 11'd0, imm};
  endfunction
  function automatic logic [63:0] i_memw(ridx_t rs1, ridx_t rs2, logic [31:0] imm);
    return {OP_MEMW, 3'd0, 5'd0, 5'(rs1), 5'(rs2), 6'd0, imm};
  endfunction
  function automatic logic [63:0] i_jump(logic [31:0] addr);
    return {OP_JUMP, 24'd0, addr};
  endfunction
  function automatic logic [63:0] i_condj(cond_e c, ridx_t rs1, ridx_t rs2, logic [31:0] addr);
    return {OP_CONDJ, 3'd0, 5'd0, 5'(rs1), 5'(rs2), 1'b0, c, 2'd0, addr};
  endfunction
  function automatic logic [63:0] i_loopnz(ridx_t rd, logic [31:0] addr);
    return {OP_LOOPNZ, 3'd0, 5'(rd), 16'd0, addr};
  endfunction
  function automatic logic [63:0] i_push(ridx_t rs1);
    return {OP_PUSH, 3'd0, 5'd0, 5'(rs1), 43'd0};
  endfunction
  function automatic logic [63:0] i_pop(ridx_t rd);
    return {OP_POP, 3'd0, 5'(rd), 48'd0};
  endfunction
  function automatic logic [63:0] i_set(chan_t ch, ridx_t ra, ridx_t rb, ridx_t rc, ridx_t rdd, ridx_t re,
                                        logic [TTAG_W-1:0] tag);
    return {OP_SET, 3'(ch), 5'(ra), 5'(rb), 5'(rc), 5'(rdd), 5'(re), tag};
  endfunction
  function automatic logic [63:0] i_synci(logic [31:0] imm);
    return {OP_SYNCI, 24'd0, imm};
  endfunction
  function automatic logic [63:0] i_waiti(logic [31:0] imm);
    return {OP_WAITI, 24'd0, imm};
  endfunction
  function automatic logic [63:0] i_read(ridx_t rd, chan_t port, bit q);
    return {OP_READ, 3'(port), 5'(rd), 16'd0, 31'd0, q};
  endfunction
  function automatic logic [63:0] i_waitr(chan_t port);
    return {OP_WAITR, 3'(port), 53'd0};
  endfunction
  function automatic logic [63:0] i_end();
    return {OP_END, 56'd0};
  endfunction

  // ---------------------------------------------------------------- DDS table
  localparam int LUT_AW = 10;
  localparam int LUT_N  = 1 << LUT_AW;
  typedef logic signed [SAMPLE_W-1:0] lut_t [LUT_N];

  // Full-period sine table, round(32767 * sin(2*pi*i/LUT_N)).
  function automatic lut_t gen_sin_lut();
    lut_t r;
    for (int i = 0; i < LUT_N; i++) begin
      real v;
      v = 32767.0 * $sin(2.0 * 3.14159265358979323846 * real'(i) / real'(LUT_N));
      r[i] = SAMPLE_W'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
    end
    return r;
  endfunction
  localparam lut_t SIN_LUT = gen_sin_lut();

  // Q1.15 product with rounding toward -inf and saturation to 16 bits.
  function automatic sample_t sat16(logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
