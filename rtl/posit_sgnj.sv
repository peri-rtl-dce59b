// posit_sgnj: posit sign injection (FSGNJ.S, FSGNJN.S, FSGNJX.S).
//
// The result is rs1 with the sign of rs2 (funct3 000), its inverse (001) or
// the XOR of both signs (010). A posit changes sign by two's complement, not
// by flipping one bit, so rs1 is negated whenever its sign differs from the
// wanted one. Zero and NaR are their own negation. Combinational, no flags.
module posit_sgnj
  import posit_pkg::*;
(
  input  logic [PS-1:0] a,
  input  logic [PS-1:0] b,
  input  logic [2:0]    funct3,
  output logic [PS-1:0] y
);

  logic want;
  always_comb begin
    unique case (funct3[1:0])
      2'b00:   want = b[PS-1];
      2'b01:   want = ~b[PS-1];
      default: want = a[PS-1] ^ b[PS-1];
    endcase
    y = (want != a[PS-1]) ? (~a + 1'b1) : a;
  end

endmodule
