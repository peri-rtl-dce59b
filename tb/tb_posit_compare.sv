// tb_posit_compare: self-checking testbench of the posit comparator.
// Random posit pairs (including equal pairs, zero and NaR) are checked for
// FMIN, FMAX, FEQ, FLT and FLE against the reference ordering, which
// compares the decoded real values (NaR below every real). Combinational
// block sampled after #1. Watchdog included.
module tb_posit_compare;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic [31:0] a, b, y;
  logic [2:0] funct3;
  logic is_minmax;
  posit_compare dut (.*);
  int checks = 0, failures = 0;
  initial begin #10_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  // reference less-than on values: compare scale and significand
  function automatic bit rlt(bit [31:0] x, bit [31:0] z);
    bit zx, nx, sx, zz, nz, sz; int ex, ez; bit [27:0] fx, fz;
    real vx, vz;
    rdecode(x, 2, zx, nx, sx, ex, fx); rdecode(z, 2, zz, nz, sz, ez, fz);
    if (nx || nz) return nx && !nz;
    vx = zx ? 0.0 : (sx ? -1.0 : 1.0) * real'(fx) * (2.0 ** (ex - 27));
    vz = zz ? 0.0 : (sz ? -1.0 : 1.0) * real'(fz) * (2.0 ** (ez - 27));
    return vx < vz;
  endfunction
  initial begin
    bit lt, eq;
    for (int n = 0; n < 20000; n++) begin
      a = rand_posit(); b = (n % 7 == 0) ? a : rand_posit();
      lt = rlt(a, b); eq = (a == b);
      for (int m = 0; m < 5; m++) begin
        is_minmax = (m < 2); funct3 = (m < 2) ? 3'(m) : 3'(m - 2);
        #1;
        checks++;
        if (y !== (m == 0 ? (lt ? a : b) : m == 1 ? (lt ? b : a) :
                   m == 2 ? 32'(lt | eq) : m == 3 ? 32'(lt) : 32'(eq))) begin
          failures++; if (failures < 10) $display("FAIL m%0d %h %h got %h", m, a, b, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
