// posit_classify: posit classification (FCLASS.S).
//
// A posit is only zero, NaR, negative or positive, so of the ten FCLASS
// bits only four can be set, at the RISC-V positions: bit 1 (negative
// normal) for a negative posit, bit 4 (+0) for zero, bit 6 (positive
// normal) for a positive posit and bit 9 (quiet NaN) for NaR. All other
// bits are always 0. Combinational. The bit positions are this design's
// choice.
module posit_classify
  import posit_pkg::*;
(
  input  logic [PS-1:0] a,
  output logic [PS-1:0] y
);

  logic zero, nar;
  always_comb begin
    zero = (a == '0);
    nar  = (a == NAR);
    y    = '0;
    y[1] = a[PS-1] & ~nar;
    y[4] = zero;
    y[6] = ~a[PS-1] & ~zero;
    y[9] = nar;
  end

endmodule
