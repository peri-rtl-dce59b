// posit_div: posit division unit (FDIV.S).
//
// Divides the fractions of two decoded posits with an iterative
// non-restoring divider that retires two quotient bits per clock. The
// quotient sign is the XOR of the signs and its exponent the difference of
// the exponents. 32 quotient bits are produced (the ratio of two fractions
// in [1,2) lies in (1/2,2), so at least 31 bits follow the leading one),
// the final remainder gives the sticky bit and one last step normalises a
// quotient below 1. Division by zero returns NaR and raises dz (the DZ
// flag of the posit CSR); NaR in either operand returns NaR; 0/x returns 0.
//
// Timing: in_valid loads the operands (1 cycle), 16 cycles of two
// iterations follow, then a normalise cycle after which out_valid is high
// for one cycle with out and dz. With the FPU's decode and encode stages an
// FDIV takes 20 cycles. in_valid is only accepted while the unit is idle.
// Two iterations per cycle and the non-restoring scheme follow the original
// design; the quotient width and the load/normalise cycles are this
// design's choice.
module posit_div
  import posit_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  unpacked_t a,
  input  unpacked_t b,
  output logic      busy,
  output logic      out_valid,
  output result_t   out,
  output logic      dz
);

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_NORM} state_e;
  typedef logic signed [33:0] rem_t;

  state_e        state;
  rem_t          r;
  logic [28:0]   d2;       // divisor, scaled by 2
  logic [31:0]   q;
  logic [3:0]    cnt;
  logic          sgn, nar, zero, dz_q;
  exp_t          rexp;

  rem_t r1, r2, rfix;
  always_comb begin
    r1 = (r >= 0) ? ((r <<< 1) - rem_t'(d2)) : ((r <<< 1) + rem_t'(d2));
    r2 = (r1 >= 0) ? ((r1 <<< 1) - rem_t'(d2)) : ((r1 <<< 1) + rem_t'(d2));
    rfix = (r < 0) ? (r + rem_t'(d2)) : r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r <= '0; d2 <= '0; q <= '0; cnt <= '0;
      sgn <= 1'b0; nar <= 1'b0; zero <= 1'b0; dz_q <= 1'b0; rexp <= '0;
      out_valid <= 1'b0;
      out <= '0;
      dz <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          r     <= rem_t'(a.frac);
          d2    <= {b.frac, 1'b0};
          q     <= '0;
          cnt   <= '0;
          sgn   <= a.sign ^ b.sign;
          rexp  <= a.exp - b.exp;
          nar   <= a.nar | b.nar | b.zero;
          zero  <= a.zero;
          dz_q  <= b.zero & ~a.nar;
          state <= S_ITER;
        end
        S_ITER: begin
          r   <= r2;
          q   <= {q[29:0], ~r1[33], ~r2[33]};
          cnt <= cnt + 1'b1;
          if (cnt == 4'd15) state <= S_NORM;
        end
        S_NORM: begin
          out.nar    <= nar;
          out.zero   <= zero & ~nar;
          out.sign   <= sgn;
          out.sticky <= (rfix != 0);
          if (q[31]) begin
            out.sig <= q;
            out.exp <= rexp;
          end else begin
            out.sig <= q << 1;
            out.exp <= rexp - 1'b1;
          end
          dz        <= dz_q;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_idle_start: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> state == S_IDLE);

endmodule
