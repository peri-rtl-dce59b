// posit_decode: common posit decoder of the FPU.
//
// Splits a PS-bit posit into sign, exponent and fraction and flags the two
// special values, zero (all bits 0) and NaR (only the sign bit set).
// A negative posit is first two's-complemented. The regime run length rc is
// counted on the bits after the sign (inverted when the regime starts with
// 1), giving k = rc-1 for a run of ones and k = -rc for a run of zeros. The
// regime and its terminating bit are shifted out, the next ES_MAX bits are
// taken as e and shifted right by (ES_MAX - es) so that a run-time es of
// ES_MIN..ES_MAX is handled by one circuit (for es=2 this is the e >> 1
// adjustment of the dual-es design). exp = (k << es) + e, and the fraction
// gets its hidden 1 prepended.
//
// Interface: p (posit), es (run-time es, 5-bit es-mode value; values outside
// ES_MIN..ES_MAX are treated as ES_MIN), o (unpacked_t). Purely
// combinational: the decoder holds no registers.
// Zero and NaR return exp=0 and frac=0.
module posit_decode
  import posit_pkg::*;
(
  input  logic [PS-1:0] p,
  input  logic [4:0]      es,
  output unpacked_t       o
);

  logic [PS-1:0] a;          // magnitude (two's complement if negative)
  logic [PS-2:0] t;          // bits after the sign, regime normalised to 0s
  logic [6:0]      rc;         // regime run length
  logic [PS-2:0] body;       // bits after regime terminator
  logic [2:0]      es_i;
  logic [ES_MAX-1:0] e_raw;
  logic [ES_MAX-1:0] e;
  logic [PS-2:0] fbits;
  logic signed [EXPW-1:0] k;

  always_comb begin
    es_i = (es >= 5'(ES_MIN) && es <= 5'(ES_MAX)) ? es[2:0] : 3'(ES_MIN);
    a    = p[PS-1] ? (~p + 1'b1) : p;
    t    = a[PS-2] ? ~a[PS-2:0] : a[PS-2:0];
    rc   = clz64({t, {(64-(PS-1)){1'b1}}});
    if (rc > 7'(PS-1)) rc = 7'(PS-1);
    k    = a[PS-2] ? (EXPW'(rc) - 1'b1) : -EXPW'(rc);
    // drop regime (rc bits) and terminator (1 bit)
    body = (rc + 7'd1 >= 7'(PS-1)) ? '0 : (a[PS-2:0] << (rc + 7'd1));
    e_raw = body[PS-2 -: ES_MAX];
    e     = e_raw >> (3'(ES_MAX) - es_i);
    fbits = body << es_i;

    o.zero = ~|p;
    o.nar  = p[PS-1] & ~|p[PS-2:0];
    o.sign = p[PS-1];
    o.exp  = (k <<< es_i) + EXPW'(e);
    o.frac = {1'b1, fbits[PS-2 -: FW-1]};
    if (o.zero || o.nar) begin
      o.sign = o.nar;
      o.exp  = '0;
      o.frac = '0;
    end
  end

endmodule
