// posit_op_decode: OpCode decoder of the posit FPU.
//
// Maps the FPU start arguments to one operation. opcode is bits 6:2 of the
// RISC-V F-extension major opcode (bits 5:2 only, as in the FPU interface):
// 0000 FMADD, 0001 FMSUB, 0010 FNMSUB, 0011 FNMADD, 0100 OP-FP. For OP-FP,
// funct7 selects the operation as in the F extension, funct3 the variant
// (sign injection, min/max, compare, FMV.X.W vs FCLASS), and funct7 1111100
// with funct3 000 is the posit-only FCVT.ES (es conversion). imm carries the
// rs2 field's low bits, imm[0] being the unsigned (W vs WU) select of
// FCVT.W[U].S and FCVT.S.W[U]. Anything else is OP_ILLEGAL.
// Combinational. The funct7 values follow RISC-V and the FCVT.ES encoding of
// the original design; OP_ILLEGAL is this design's addition.
module posit_op_decode
  import posit_pkg::*;
(
  input  logic [3:0] opcode,
  input  logic [6:0] funct7,
  input  logic [2:0] funct3,
  output fpu_op_t    op,
  output logic       rd_is_int     // result goes to an integer register
);

  always_comb begin
    op = OP_ILLEGAL;
    unique case (opcode)
      4'b0000: op = OP_FMADD;
      4'b0001: op = OP_FMSUB;
      4'b0010: op = OP_FNMSUB;
      4'b0011: op = OP_FNMADD;
      4'b0100: begin
        unique case (funct7)
          7'b0000000: op = OP_FADD;
          7'b0000100: op = OP_FSUB;
          7'b0001000: op = OP_FMUL;
          7'b0001100: op = OP_FDIV;
          7'b0101100: op = OP_FSQRT;
          7'b0010000: op = (funct3 <= 3'b010) ? OP_FSGNJ : OP_ILLEGAL;
          7'b0010100: op = (funct3 <= 3'b001) ? OP_FMINMAX : OP_ILLEGAL;
          7'b1010000: op = (funct3 <= 3'b010) ? OP_FCMP : OP_ILLEGAL;
          7'b1100000: op = OP_FCVT_W_S;
          7'b1101000: op = OP_FCVT_S_W;
          7'b1110000: op = (funct3 == 3'b000) ? OP_FMV_X_W :
                           (funct3 == 3'b001) ? OP_FCLASS : OP_ILLEGAL;
          7'b1111000: op = (funct3 == 3'b000) ? OP_FMV_W_X : OP_ILLEGAL;
          7'b1111100: op = (funct3 == 3'b000) ? OP_FCVT_ES : OP_ILLEGAL;
          default:    op = OP_ILLEGAL;
        endcase
      end
      default: op = OP_ILLEGAL;
    endcase
    rd_is_int = (op == OP_FCMP) || (op == OP_FCVT_W_S) || (op == OP_FMV_X_W) ||
                (op == OP_FCLASS);
  end

endmodule
