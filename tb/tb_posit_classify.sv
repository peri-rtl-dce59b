// tb_posit_classify: self-checking testbench of FCLASS for posits.
// Zero, NaR, and random negative and positive posits must set exactly one
// bit: 4, 9, 1 and 6 respectively. Combinational, sampled after #1.
// Watchdog included.
module tb_posit_classify;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic [31:0] a, y;
  posit_classify dut (.*);
  int checks = 0, failures = 0;
  initial begin #10_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    logic [31:0] e;
    for (int n = 0; n < 10000; n++) begin
      a = rand_posit();
      e = (a == 0) ? 32'h10 : (a == R_NAR) ? 32'h200 : a[31] ? 32'h2 : 32'h40;
      #1;
      checks++;
      if (y !== e) begin failures++; if (failures < 10) $display("FAIL %h got %h exp %h", a, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
