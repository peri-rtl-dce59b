// posit_pkg: types and constants shared by the posit FPU.
//
// A 32-bit posit is carried between the units in two forms:
//  * unpacked_t: what the common decoder produces. The fraction keeps the
//    hidden bit at its MSB and is as wide as the widest fraction of the
//    supported es values (es=2 gives 27 fraction bits, so 28 bits in all).
//    The exponent is (k << es) + e as a signed number.
//  * result_t: what the arithmetic units hand to the common encoder. The
//    significand is normalised with its hidden bit at bit 31; every bit
//    below the 32 kept bits is folded into sticky.
// The exponent is 12 bits signed in both, wide enough for the sum of two
// product exponents (es=3: |exp| <= 247 per operand) without overflow.
// The FPU supports two es values at run time, ES_MIN=2 and ES_MAX=3, as the
// dynamic-switching unit of the design does; these and PS=32 follow the
// design's main configuration, the widths of the internal buses are this
// implementation's choice.
package posit_pkg;

  localparam int unsigned PS     = 32;
  localparam int unsigned ES_MIN = 2;
  localparam int unsigned ES_MAX = 3;
  localparam int unsigned FW     = PS - ES_MIN - 2;  // fraction incl. hidden bit: 28
  localparam int unsigned EXPW   = 12;
  localparam int unsigned SIGW   = 32;

  localparam logic [PS-1:0] NAR    = {1'b1, {(PS-1){1'b0}}};
  localparam logic [PS-1:0] MAXPOS = {1'b0, {(PS-1){1'b1}}};
  localparam logic [PS-1:0] MINPOS = {{(PS-1){1'b0}}, 1'b1};

  typedef logic signed [EXPW-1:0] exp_t;

  typedef struct packed {
    logic          zero;
    logic          nar;
    logic          sign;
    exp_t          exp;
    logic [FW-1:0] frac;   // 1.f, hidden bit at MSB
  } unpacked_t;

  typedef struct packed {
    logic            zero;
    logic            nar;
    logic            sign;
    exp_t            exp;
    logic [SIGW-1:0] sig;  // 1.f, hidden bit at MSB
    logic            sticky;
  } result_t;

  // Operations of the FPU (F extension with posit meaning, plus FCVT.ES).
  typedef enum logic [4:0] {
    OP_FMADD, OP_FMSUB, OP_FNMSUB, OP_FNMADD,
    OP_FADD, OP_FSUB, OP_FMUL, OP_FDIV, OP_FSQRT,
    OP_FSGNJ, OP_FMINMAX, OP_FCMP,
    OP_FCVT_W_S, OP_FCVT_S_W,
    OP_FMV_X_W, OP_FMV_W_X, OP_FCLASS,
    OP_FCVT_ES, OP_ILLEGAL
  } fpu_op_t;

  // FMA operating mode: fused a*b+c, add (a+c, product stages skipped),
  // multiply (a*b, align and add stages skipped).
  typedef enum logic [1:0] {FMA_FUSED, FMA_ADD, FMA_MUL} fma_kind_t;

  // Index of the DZ bit in fflags (NV OF UF DZ... order of RISC-V: NV=4, DZ=3).
  localparam int unsigned FFLAG_DZ = 3;

  // Round-to-zero encoding of the rm field.
  localparam logic [2:0] RM_RTZ = 3'b001;

  // Count of leading zeros of a 64-bit vector (64 for zero), by halving
  // the search window six times.
  function automatic logic [6:0] clz64(input logic [63:0] v);
    logic [63:0] x;
    logic [6:0]  n;
    x = v;
    n = '0;
    if (x[63:32] == '0) begin n = n + 7'd32; x = x << 32; end
    if (x[63:48] == '0) begin n = n + 7'd16; x = x << 16; end
    if (x[63:56] == '0) begin n = n + 7'd8;  x = x << 8;  end
    if (x[63:60] == '0) begin n = n + 7'd4;  x = x << 4;  end
    if (x[63:62] == '0) begin n = n + 7'd2;  x = x << 2;  end
    if (x[63] == 1'b0)  begin n = n + 7'd1;  end
    if (v == '0) n = 7'd64;
    return n;
  endfunction

endpackage
