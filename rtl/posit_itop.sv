// posit_itop: integer-to-posit conversion (FCVT.S.W, FCVT.S.WU).
//
// For a signed input (u=0) a negative integer is two's-complemented and the
// result sign set; for an unsigned input (u=1) the sign is cleared. The
// leading zeros z of the magnitude are counted, the magnitude is shifted
// left by z so its leading one becomes the hidden bit, and the exponent is
// PS-1-z. The 32-bit significand holds every integer bit, so the sticky
// bit is 0; rounding is left to the common encoder. Zero gives the zero
// flag. Combinational; the FPU registers it once, so with decode and
// encode stages a conversion takes 3 cycles. The steps follow the
// original algorithm.
module posit_itop
  import posit_pkg::*;
(
  input  logic [PS-1:0] i,
  input  logic          u,
  output result_t       o
);

  logic [PS-1:0] mag;
  logic [6:0]    z;
  logic          s;

  always_comb begin
    s   = i[PS-1] & ~u;
    mag = s ? (~i + 1'b1) : i;
    z   = clz64({mag, 32'hFFFF_FFFF});
    o.zero   = (mag == '0);
    o.nar    = 1'b0;
    o.sign   = s;
    o.exp    = exp_t'(PS - 1) - exp_t'(z);
    o.sig    = SIGW'(mag << z[4:0]);
    o.sticky = 1'b0;
  end

endmodule
