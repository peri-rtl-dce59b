// posit_fma: fused multiply-add unit of the posit FPU.
//
// Computes (-1)^ng * (a*b) + (-1)^(sub^ng) * c on decoded posits and hands
// an unrounded result (sign, exponent, 32-bit significand, sticky) to the
// common encoder. The same hardware does FMADD/FMSUB/FNMSUB/FNMADD
// (kind FMA_FUSED), FADD/FSUB (kind FMA_ADD: a + c, the product stages are
// skipped) and FMUL (kind FMA_MUL: a*b, the align and add stages are
// skipped). NaR in any used operand gives NaR, a zero product with a zero
// addend gives zero; a zero operand otherwise simply adds nothing.
//
// Stages (one register each):
//   1 two 28x14-bit partial products, product sign and exponent
//   2 partial products summed, product overflow (value >= 2) normalised
//   3 operands ordered by magnitude, smaller one aligned into a 60-bit
//     window, bits shifted out ORed into its lowest bit
//   4 add or subtract
//   5 leading-zero count and normalising shift
//   6 packing into the result (32-bit significand + sticky)
// Fused ops take stages 1-6, FADD/FSUB enter at stage 3 and FMUL goes from
// stage 2 to stage 5, so with the FPU's decode and encode registers they
// take 8, 6 and 6 cycles. The unit accepts one operation at a time (the FPU
// is blocking); out_valid pulses for one cycle.
// The order of operations follows the unit's published algorithm; the
// split into six stages and the partial-product split are this design's.
module posit_fma
  import posit_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  fma_kind_t kind,
  input  logic      ng,
  input  logic      sub,
  input  unpacked_t a,
  input  unpacked_t b,
  input  unpacked_t c,
  output logic      out_valid,
  output result_t   out
);

  localparam int unsigned PW = 2 * FW;   // 56-bit product
  localparam int unsigned WW = PW + 4;   // 60-bit add window
  localparam exp_t EXP_LOW = exp_t'(-1024);

  typedef struct packed {
    fma_kind_t kind;
    logic      nar;
    logic      zero;      // both product and addend zero
    logic      pz;        // product is zero
    logic      ps;        // product sign
    exp_t      pexp;
    logic [FW+13:0] pp_lo;   // a.frac * b.frac[13:0]
    logic [FW+13:0] pp_hi;   // a.frac * b.frac[27:14]
    logic      cs;        // addend sign
    logic      cz;
    exp_t      cexp;
    logic [FW-1:0] cf;
  } st1_t;

  typedef struct packed {
    fma_kind_t kind;
    logic      nar;
    logic      zero;
    logic      pz;
    logic      ps;
    exp_t      pexp;
    logic [PW-1:0] pf;    // normalised, MSB at bit PW-1
    logic      cs;
    logic      cz;
    exp_t      cexp;
    logic [FW-1:0] cf;
  } st2_t;

  typedef struct packed {
    logic      nar;
    logic      zero;
    logic      sgn;       // sign of the larger operand
    logic      eff_sub;
    exp_t      exp;       // exponent of the larger operand
    logic [WW-1:0] big;
    logic [WW-1:0] sml;
  } st3_t;

  typedef struct packed {
    logic      nar;
    logic      zero;
    logic      sgn;
    exp_t      exp;
    logic [WW-1:0] sum;   // binary point after bit WW-2
  } st4_t;

  typedef struct packed {
    logic      nar;
    logic      zero;
    logic      sgn;
    exp_t      exp;
    logic [WW-1:0] norm;  // MSB at bit WW-1
  } st5_t;

  st1_t s1_d, s1_q;
  st2_t s2_d, s2_q;
  st3_t s3_d, s3_q;
  st4_t s4_d, s4_q;
  st5_t s5_d, s5_q;
  result_t s6_d, s6_q;
  logic v1, v2, v3, v4, v5, v6;

  // ---------------- stage 1: partial products ----------------
  always_comb begin
    s1_d.kind  = kind;
    s1_d.nar   = a.nar | b.nar | (c.nar & (kind != FMA_MUL));
    s1_d.pz    = a.zero | b.zero;
    s1_d.cz    = c.zero | (kind == FMA_MUL);
    s1_d.zero  = s1_d.pz & s1_d.cz;
    s1_d.ps    = a.sign ^ b.sign ^ ng;
    s1_d.pexp  = a.exp + b.exp;
    s1_d.pp_lo = a.frac * b.frac[13:0];
    s1_d.pp_hi = a.frac * b.frac[FW-1:14];
    s1_d.cs    = c.sign ^ sub ^ ng;
    s1_d.cexp  = c.exp;
    s1_d.cf    = c.frac;
  end

  // ---------------- stage 2: sum and product overflow ----------------
  logic [PW-1:0] prod;
  always_comb begin
    prod = PW'(s1_q.pp_lo) + (PW'(s1_q.pp_hi) << 14);
    s2_d.kind = s1_q.kind;
    s2_d.nar  = s1_q.nar;
    s2_d.zero = s1_q.zero;
    s2_d.pz   = s1_q.pz;
    s2_d.ps   = s1_q.ps;
    s2_d.cs   = s1_q.cs;
    s2_d.cz   = s1_q.cz;
    s2_d.cexp = s1_q.cexp;
    s2_d.cf   = s1_q.cf;
    if (prod[PW-1]) begin           // product in [2,4)
      s2_d.pf   = prod;
      s2_d.pexp = s1_q.pexp + 1'b1;
    end else begin                  // product in [1,2)
      s2_d.pf   = prod << 1;
      s2_d.pexp = s1_q.pexp;
    end
  end

  // Stage-3 input: from stage 2 (fused) or straight from the operands (add).
  st2_t s3_in;
  always_comb begin
    if (in_valid && kind == FMA_ADD) begin
      s3_in.kind = FMA_ADD;
      s3_in.nar  = a.nar | c.nar;
      s3_in.pz   = a.zero;
      s3_in.cz   = c.zero;
      s3_in.zero = a.zero & c.zero;
      s3_in.ps   = a.sign ^ ng;
      s3_in.pexp = a.exp;
      s3_in.pf   = {a.frac, {FW{1'b0}}};
      s3_in.cs   = c.sign ^ sub ^ ng;
      s3_in.cexp = c.exp;
      s3_in.cf   = c.frac;
    end else begin
      s3_in = s2_q;
    end
  end

  // ---------------- stage 3: order and align ----------------
  logic [WW-1:0] pw, cw, bigw, smallw, shifted, lost_mask;
  exp_t pe, ce, ediff;
  logic swap;
  logic [6:0] sh;
  always_comb begin
    pw = {1'b0, s3_in.pf, 3'b000};
    cw = {1'b0, s3_in.cf, {(PW-FW){1'b0}}, 3'b000};
    pe = s3_in.pz ? EXP_LOW : s3_in.pexp;
    ce = s3_in.cz ? EXP_LOW : s3_in.cexp;
    if (s3_in.pz) pw = '0;
    if (s3_in.cz) cw = '0;
    swap   = (ce > pe) || (ce == pe && cw > pw);
    bigw   = swap ? cw : pw;
    smallw = swap ? pw : cw;
    ediff  = swap ? (ce - pe) : (pe - ce);
    sh     = (ediff > exp_t'(WW)) ? 7'(WW) : 7'(ediff);
    shifted   = (sh >= 7'(WW)) ? '0 : (smallw >> sh);
    lost_mask = (sh >= 7'(WW)) ? '1 : ~({WW{1'b1}} << sh);
    s3_d.nar     = s3_in.nar;
    s3_d.zero    = s3_in.zero;
    s3_d.sgn     = swap ? s3_in.cs : s3_in.ps;
    s3_d.eff_sub = s3_in.cs ^ s3_in.ps;
    s3_d.exp     = swap ? ce : pe;
    s3_d.big     = bigw;
    s3_d.sml   = shifted | WW'(|(smallw & lost_mask));
  end

  // ---------------- stage 4: add / subtract ----------------
  always_comb begin
    s4_d.nar  = s3_q.nar;
    s4_d.zero = s3_q.zero;
    s4_d.sgn  = s3_q.sgn;
    s4_d.exp  = s3_q.exp;
    s4_d.sum  = s3_q.eff_sub ? (s3_q.big - s3_q.sml) : (s3_q.big + s3_q.sml);
  end

  // Stage-5 input: from stage 4, or from stage 2 for a multiply.
  st4_t s5_in;
  always_comb begin
    if (v2 && s2_q.kind == FMA_MUL) begin
      s5_in.nar  = s2_q.nar;
      s5_in.zero = s2_q.pz;
      s5_in.sgn  = s2_q.ps;
      s5_in.exp  = s2_q.pexp;
      s5_in.sum  = {1'b0, s2_q.pf, 3'b000};
    end else begin
      s5_in = s4_q;
    end
  end

  // ---------------- stage 5: normalise ----------------
  logic [6:0] lz;
  always_comb begin
    lz = clz64({s5_in.sum, {(64-WW){1'b1}}});
    s5_d.nar  = s5_in.nar;
    s5_d.zero = s5_in.zero | (s5_in.sum == '0);
    s5_d.sgn  = s5_in.sgn;
    s5_d.exp  = s5_in.exp + 1'b1 - exp_t'(lz);
    s5_d.norm = s5_in.sum << lz;
  end

  // ---------------- stage 6: pack ----------------
  always_comb begin
    s6_d.nar    = s5_q.nar;
    s6_d.zero   = s5_q.zero & ~s5_q.nar;
    s6_d.sign   = s5_q.sgn;
    s6_d.exp    = s5_q.exp;
    s6_d.sig    = s5_q.norm[WW-1 -: SIGW];
    s6_d.sticky = |s5_q.norm[WW-SIGW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, v4, v5, v6} <= '0;
      s1_q <= '0; s2_q <= '0; s3_q <= '0; s4_q <= '0; s5_q <= '0; s6_q <= '0;
    end else begin
      v1 <= in_valid && kind != FMA_ADD;
      v2 <= v1;
      v3 <= (in_valid && kind == FMA_ADD) || (v2 && s2_q.kind == FMA_FUSED);
      v4 <= v3;
      v5 <= v4 || (v2 && s2_q.kind == FMA_MUL);
      v6 <= v5;
      s1_q <= s1_d;
      s2_q <= s2_d;
      s3_q <= s3_d;
      s4_q <= s4_d;
      s5_q <= s5_d;
      s6_q <= s6_d;
    end
  end

  assign out_valid = v6;
  assign out       = s6_q;

  // One operation in flight: a new one may only start when the unit is idle.
  a_one_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> !(v1 || v2 || v3 || v4 || v5));

endmodule
