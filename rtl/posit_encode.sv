// posit_encode: common posit encoder of the FPU.
//
// Turns a result (sign, exponent, significand with hidden bit at bit 31,
// sticky, zero and NaR flags) into a PS-bit posit for a run-time es.
// The exponent is split into k = exp >>> es and e = exp mod 2^es. A regime
// of k+1 ones and a zero (k >= 0), or -k zeros and a one (k < 0), is built
// by shifting the word {r, ~r, e, fraction} right by (run length - 1) with
// the regime bit as fill. For es=2 the e bits are shifted up by one first so
// that one datapath serves both es values (the "ef << 1" adjustment of the
// dual-es design). The top PS-1 bits are the magnitude, the next bit is the
// guard bit, all lower bits and the input sticky form the sticky bit, and
// the magnitude is rounded to nearest with ties to even. A posit neither
// overflows nor underflows: exponents past maxpos give maxpos and below
// minpos give minpos, and rounding never produces zero or NaR. The sign is
// applied by two's complement; the zero and NaR flags override the result.
//
// Interface: r (result_t), es (5-bit es value; outside ES_MIN..ES_MAX is
// treated as ES_MIN), p (posit). Purely combinational.
module posit_encode
  import posit_pkg::*;
(
  input  result_t     r,
  input  logic [4:0]  es,
  output logic [PS-1:0] p
);

  localparam int unsigned XW = 2 + ES_MAX + (SIGW - 1);   // 36
  localparam int unsigned YW = XW + PS;                   // 68

  logic [2:0]        es_i;
  exp_t              k;
  logic [ES_MAX-1:0] e;
  logic              r0;
  logic [6:0]        run;
  logic [ES_MAX+SIGW-2:0] ef;
  logic [YW-1:0]     y, ysh;
  logic [PS-2:0]     mag;
  logic              guard, sticky, up;
  logic [PS-1:0]     mag_r;

  always_comb begin
    es_i = (es >= 5'(ES_MIN) && es <= 5'(ES_MAX)) ? es[2:0] : 3'(ES_MIN);
    k    = r.exp >>> es_i;
    e    = ES_MAX'(r.exp - (k <<< es_i));
    r0   = ~k[EXPW-1];
    run  = r0 ? 7'(k + 1) : 7'(-k);
    ef   = {e, r.sig[SIGW-2:0]} << (3'(ES_MAX) - es_i);
    y    = {r0, ~r0, ef, {PS{1'b0}}};
    ysh  = '0;
    mag  = '0;
    guard  = 1'b0;
    sticky = 1'b0;
    if (k >= exp_t'(PS - 2)) begin
      mag = MAXPOS[PS-2:0];
    end else if (k < -exp_t'(PS - 2)) begin
      mag = MINPOS[PS-2:0];
    end else begin
      ysh    = r0 ? ~((~y) >> (run - 7'd1)) : (y >> (run - 7'd1));
      mag    = ysh[YW-1 -: PS-1];
      guard  = ysh[YW-PS];
      sticky = (|ysh[YW-PS-1:0]) | r.sticky;
    end
    up    = guard & (sticky | mag[0]);
    mag_r = {1'b0, mag} + PS'(up);
    p     = r.sign ? (~mag_r + 1'b1) : mag_r;
    if (r.zero) p = '0;
    if (r.nar)  p = NAR;
  end

endmodule
