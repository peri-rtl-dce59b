// posit_regfile: register file of the posit co-processor.
//
// NREGS registers of PS bits, three combinational read ports (rs1, rs2 and
// rs3 of fused multiply-add) and one write port written on the rising clock
// edge. Unlike the integer x0, register 0 is an ordinary register. All
// registers reset to posit zero. A read in the same cycle as a write to the
// same register returns the old value. The co-processor keeping its own
// register file follows the original design; the port count follows from
// the R4 instructions, the reset is this design's choice.
module posit_regfile
  import posit_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] ra1,
  input  logic [$clog2(NREGS)-1:0] ra2,
  input  logic [$clog2(NREGS)-1:0] ra3,
  output logic [PS-1:0]            rd1,
  output logic [PS-1:0]            rd2,
  output logic [PS-1:0]            rd3,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] wa,
  input  logic [PS-1:0]            wd
);

  logic [PS-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[wa] <= wd;
    end
  end

  assign rd1 = regs[ra1];
  assign rd2 = regs[ra2];
  assign rd3 = regs[ra3];

endmodule
