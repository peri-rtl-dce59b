// posit_compare: posit comparison (FMIN.S, FMAX.S, FEQ.S, FLT.S, FLE.S).
//
// Posits order like two's-complement integers, so the comparison is a
// signed integer comparison of the bit patterns with no special cases;
// NaR, the most negative pattern, is smaller than every real. is_minmax
// selects FMIN (funct3 000) / FMAX (001); otherwise FLE (000), FLT (001)
// and FEQ (010) return 1 or 0. Combinational. In a tightly-coupled core the
// integer branch comparator can serve instead; this block gives the FPU
// and the co-processor the same comparison on their own.
module posit_compare
  import posit_pkg::*;
(
  input  logic [PS-1:0] a,
  input  logic [PS-1:0] b,
  input  logic [2:0]    funct3,
  input  logic          is_minmax,
  output logic [PS-1:0] y
);

  logic lt, eq;
  always_comb begin
    lt = $signed(a) < $signed(b);
    eq = (a == b);
    if (is_minmax)
      y = (funct3[0] ^ lt) ? a : b;
    else
      unique case (funct3)
        3'b010:  y = PS'(eq);
        3'b001:  y = PS'(lt);
        3'b000:  y = PS'(lt | eq);
        default: y = '0;
      endcase
  end

endmodule
