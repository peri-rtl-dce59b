// tb_posit_op_decode: self-checking testbench of the OpCode decoder.
// Every (opcode, funct7, funct3) in a table of the F-extension encodings
// plus FCVT.ES must give its operation and integer-destination flag;
// random other encodings must give OP_ILLEGAL unless they are in the
// table. Combinational, sampled after #1. Watchdog included.
module tb_posit_op_decode;
  import posit_pkg::*;
  logic [3:0] opcode; logic [6:0] funct7; logic [2:0] funct3;
  fpu_op_t op; logic rd_is_int;
  posit_op_decode dut (.*);
  int checks = 0, failures = 0;
  initial begin #10_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  typedef struct { logic [3:0] o; logic [6:0] f7; logic [2:0] f3; fpu_op_t op; bit i; } ent_t;
  ent_t tab [] = '{
    '{4'b0000, 7'h00, 3'b000, OP_FMADD, 0}, '{4'b0001, 7'h00, 3'b000, OP_FMSUB, 0},
    '{4'b0010, 7'h00, 3'b000, OP_FNMSUB, 0}, '{4'b0011, 7'h00, 3'b000, OP_FNMADD, 0},
    '{4'b0100, 7'b0000000, 3'b000, OP_FADD, 0}, '{4'b0100, 7'b0000100, 3'b000, OP_FSUB, 0},
    '{4'b0100, 7'b0001000, 3'b000, OP_FMUL, 0}, '{4'b0100, 7'b0001100, 3'b000, OP_FDIV, 0},
    '{4'b0100, 7'b0101100, 3'b000, OP_FSQRT, 0}, '{4'b0100, 7'b0010000, 3'b010, OP_FSGNJ, 0},
    '{4'b0100, 7'b0010100, 3'b001, OP_FMINMAX, 0}, '{4'b0100, 7'b1010000, 3'b010, OP_FCMP, 1},
    '{4'b0100, 7'b1100000, 3'b001, OP_FCVT_W_S, 1}, '{4'b0100, 7'b1101000, 3'b000, OP_FCVT_S_W, 0},
    '{4'b0100, 7'b1110000, 3'b000, OP_FMV_X_W, 1}, '{4'b0100, 7'b1110000, 3'b001, OP_FCLASS, 1},
    '{4'b0100, 7'b1111000, 3'b000, OP_FMV_W_X, 0}, '{4'b0100, 7'b1111100, 3'b000, OP_FCVT_ES, 0},
    '{4'b0100, 7'b1111100, 3'b001, OP_ILLEGAL, 0}, '{4'b0101, 7'b0000000, 3'b000, OP_ILLEGAL, 0},
    '{4'b0100, 7'b0010100, 3'b010, OP_ILLEGAL, 0}, '{4'b0100, 7'b1111111, 3'b000, OP_ILLEGAL, 0}};
  initial begin
    foreach (tab[j]) begin
      opcode = tab[j].o; funct7 = tab[j].f7; funct3 = tab[j].f3; #1;
      checks++;
      if (op !== tab[j].op || rd_is_int !== tab[j].i) begin
        failures++; $display("FAIL entry %0d got %s int%0d", j, op.name(), rd_is_int);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
