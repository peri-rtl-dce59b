// tb_posit_sgnj: self-checking testbench of posit sign injection.
// For random pairs the result of FSGNJ, FSGNJN and FSGNJX is checked by
// value: its magnitude must equal that of rs1 (zero and NaR unchanged) and
// its sign must be the requested one. Combinational, sampled after #1.
// Watchdog included.
module tb_posit_sgnj;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic [31:0] a, b, y;
  logic [2:0] funct3;
  posit_sgnj dut (.*);
  int checks = 0, failures = 0;
  initial begin #10_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    bit want; logic [31:0] mag_a, mag_y, e;
    for (int n = 0; n < 30000; n++) begin
      a = rand_posit(); b = rand_posit(); funct3 = 3'(n % 3);
      want = (n % 3 == 0) ? b[31] : (n % 3 == 1) ? ~b[31] : a[31] ^ b[31];
      mag_a = a[31] ? -a : a;
      e = (a == 0 || a == R_NAR) ? a : (want ? -mag_a : mag_a);
      #1;
      checks++;
      if (y !== e) begin failures++; if (failures < 10) $display("FAIL f%0d %h %h got %h exp %h", funct3, a, b, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
