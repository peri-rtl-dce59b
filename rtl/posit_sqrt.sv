// posit_sqrt: posit square-root unit (FSQRT.S).
//
// The exponent is halved (arithmetic shift); for an odd exponent the
// fraction is doubled first, so the radicand lies in [1,4). An iterative
// non-restoring square root then produces one root bit per clock: 29 bits,
// the hidden bit, 27 fraction bits and a guard bit, enough for the widest
// es=2 fraction. The final remainder, corrected if negative, gives the
// sticky bit. The root is always in [1,2), so no normalisation is needed.
// A negative or NaR operand gives NaR, zero gives zero, the sign is 0.
//
// Timing: in_valid loads the operand (1 cycle), 29 iteration cycles follow;
// out_valid is then high for one cycle and out is valid with it. With the
// FPU's decode and encode stages an FSQRT takes 32 cycles. in_valid is
// only accepted while the unit is idle. One iteration per cycle and the
// non-restoring scheme follow the original design; the root width is this
// design's choice.
module posit_sqrt
  import posit_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  unpacked_t a,
  output logic      busy,
  output logic      out_valid,
  output result_t   out
);

  localparam int unsigned RB = 29;                 // root bits
  typedef logic signed [RB+6:0] rem_t;

  logic          run;
  logic [4:0]    cnt;
  logic [2*RB-1:0] rad;                            // radicand, shifted 2 bits per cycle
  rem_t          r;
  logic [RB-1:0] q;
  logic          nar, zero;
  exp_t          rexp;
  logic          done;

  rem_t rn, rfix;
  logic [1:0] two;
  always_comb begin
    two  = rad[2*RB-1 -: 2];
    rn   = (r >= 0) ? ((r <<< 2) + rem_t'(two) - rem_t'({q, 2'b01}))
                    : ((r <<< 2) + rem_t'(two) + rem_t'({q, 2'b11}));
    rfix = (r < 0) ? (r + rem_t'({q, 1'b1})) : r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cnt <= '0; rad <= '0; r <= '0; q <= '0;
      nar <= 1'b0; zero <= 1'b0; rexp <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_valid && !run) begin
        run  <= 1'b1;
        cnt  <= '0;
        r    <= '0;
        q    <= '0;
        rad  <= a.exp[0] ? {a.frac, 30'b0} : {1'b0, a.frac, 29'b0};
        rexp <= a.exp >>> 1;
        nar  <= a.nar | a.sign;
        zero <= a.zero;
      end else if (run) begin
        r   <= rn;
        q   <= {q[RB-2:0], ~rn[RB+6]};
        rad <= rad << 2;
        cnt <= cnt + 1'b1;
        if (cnt == 5'(RB - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    out.nar    = nar;
    out.zero   = zero & ~nar;
    out.sign   = 1'b0;
    out.exp    = rexp;
    out.sig    = {q, {(SIGW-RB){1'b0}}};
    out.sticky = (rfix != 0);
  end

  assign out_valid = done;
  assign busy      = run;

  a_idle_start: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !run);

endmodule
