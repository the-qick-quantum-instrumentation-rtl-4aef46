// ro_average: triggered accumulation of one readout window.
//
// On a trigger the block skips `offset` decimated samples, then sums the next
// `length` I and Q samples and presents the two sums for one clock
// (sum_valid). cap_valid marks the samples inside the window so the raw buffer
// can store them. The paper: the average block captures one IQ pair per
// readout, is started by a tProcessor trigger, and offset and length are set by
// the user; its figure prints a sigma. Returning the sum (not divided by the
// length), counting offset in decimated samples, treating length 0 as 1 and
// ignoring triggers while a window is open are this design's choices.
//
// Timing: one sample per clock. A trigger in clock c makes the sample of clock
// c+1+offset the first one summed; sum_valid rises the clock after the last.
module ro_average
  import qick_pkg::*;
#(
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    trig,
  input  logic [15:0]             offset,
  input  logic [15:0]             length,
  input  sample_t                 in_i,
  input  sample_t                 in_q,
  output logic                    cap_valid,
  output logic                    sum_valid,
  output logic signed [ACC_W-1:0] sum_i,
  output logic signed [ACC_W-1:0] sum_q,
  output logic                    busy
);
  typedef enum logic [1:0] {A_IDLE, A_WAIT, A_ACC} st_e;
  st_e st;
  logic [15:0] cnt;
  logic signed [ACC_W-1:0] acc_i, acc_q;

  assign busy      = (st != A_IDLE);
  assign cap_valid = (st == A_ACC);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= A_IDLE;
      cnt       <= '0;
      acc_i     <= '0;
      acc_q     <= '0;
      sum_valid <= 1'b0;
      sum_i     <= '0;
      sum_q     <= '0;
    end else begin
      sum_valid <= 1'b0;
      unique case (st)
        A_IDLE: if (trig) begin
          acc_i <= '0;
          acc_q <= '0;
          if (offset == '0) begin
            st  <= A_ACC;
            cnt <= (length == '0) ? 16'd0 : length - 1'b1;
          end else begin
            st  <= A_WAIT;
            cnt <= offset - 1'b1;
          end
        end
        A_WAIT: begin
          if (cnt == '0) begin
            st  <= A_ACC;
            cnt <= (length == '0) ? 16'd0 : length - 1'b1;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        A_ACC: begin
          acc_i <= acc_i + ACC_W'(in_i);
          acc_q <= acc_q + ACC_W'(in_q);
          if (cnt == '0) begin
            st        <= A_IDLE;
            sum_valid <= 1'b1;
            sum_i     <= acc_i + ACC_W'(in_i);
            sum_q     <= acc_q + ACC_W'(in_q);
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
