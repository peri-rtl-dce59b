// posit_ptoi: posit-to-integer conversion (FCVT.W.S, FCVT.WU.S).
//
// The fraction (hidden bit included) is zero-extended and shifted left by
// the exponent so that its integer part, a guard bit and a sticky bit fall
// out. The integer part is rounded to nearest with ties to even, or
// truncated when rm is round-to-zero (001); RTZ is the second rounding mode
// kept for these two instructions. Results out of range saturate as in the
// RISC-V F extension: signed to 2^31-1 or -2^31, unsigned to 2^32-1, a
// negative value to 0 when unsigned; NaR gives 2^31-1 (signed) or 2^32-1
// (unsigned). No flags are raised.
//
// Timing: in_valid registers the shifted value (one register stage);
// out_valid and i (rounded and saturated, combinational from that register)
// follow one cycle later. With the FPU's decode stage in front and its
// output register behind, a conversion takes 3 cycles. The shift and the
// round-to-zero option follow the original algorithm; the saturation
// values and the tie-to-even sticky bit are this design's reading of the
// RISC-V rules.
module posit_ptoi
  import posit_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  unpacked_t     a,
  input  logic          u,
  input  logic [2:0]    rm,
  output logic          out_valid,
  output logic [PS-1:0] i
);

  typedef struct packed {
    logic        nar;
    logic        zero;
    logic        sign;
    logic        big;      // |value| >= 2^33
    logic [32:0] ip;       // integer part
    logic        guard;
    logic        sticky;
    logic        u;
    logic        rtz;
  } st_t;

  st_t d, q;
  logic [59:0] sh;
  logic        v;

  always_comb begin
    sh       = '0;
    d.nar    = a.nar;
    d.zero   = a.zero;
    d.sign   = a.sign;
    d.u      = u;
    d.rtz    = (rm == RM_RTZ);
    d.big    = 1'b0;
    d.ip     = '0;
    d.guard  = 1'b0;
    d.sticky = 1'b0;
    if (a.exp > exp_t'(32)) begin
      d.big = 1'b1;
    end else if (a.exp >= 0) begin
      sh       = {32'b0, a.frac} << a.exp[5:0];
      d.ip     = sh[59:27];
      d.guard  = sh[26];
      d.sticky = |sh[25:0];
    end else begin
      d.guard  = (a.exp == -1);
      d.sticky = (a.exp == -1) ? |a.frac[FW-2:0] : 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
      v <= 1'b0;
    end else begin
      v <= in_valid;
      if (in_valid) q <= d;
    end
  end

  logic        up;
  logic [33:0] mag;
  always_comb begin
    up  = ~q.rtz & q.guard & (q.sticky | q.ip[0]);
    mag = {1'b0, q.ip} + 34'(up);
    if (q.nar)
      i = q.u ? 32'hFFFF_FFFF : 32'h7FFF_FFFF;
    else if (q.zero)
      i = '0;
    else if (q.u) begin
      if (q.sign) i = '0;
      else if (q.big || mag > 34'hFFFF_FFFF) i = 32'hFFFF_FFFF;
      else i = mag[31:0];
    end else begin
      if (q.sign) i = (q.big || mag > 34'h8000_0000) ? 32'h8000_0000 : (~mag[31:0] + 1'b1);
      else        i = (q.big || mag > 34'h7FFF_FFFF) ? 32'h7FFF_FFFF : mag[31:0];
    end
  end

  assign out_valid = v;

endmodule
