// tb_posit_ptoi: self-checking testbench of posit-to-integer conversion.
// Random posits (biased to specials, extremes and values near integers) are
// converted signed and unsigned, round-to-nearest-even and round-to-zero,
// in es=2 and es=3, and compared with the reference (RISC-V saturation
// rules). out_valid must follow in_valid by exactly one cycle. Watchdog.
module tb_posit_ptoi;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, u = 0, out_valid;
  logic [2:0] rm = 0;
  logic [31:0] pa, i;
  logic [4:0] es = 2;
  unpacked_t a;
  posit_decode da (.p(pa), .es(es), .o(a));
  posit_ptoi dut (.*);
  int checks = 0, failures = 0;
  initial begin #10_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    logic [31:0] e;
    pa = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      pa = rand_posit(); es = 5'(2 + n % 2); u = n[1]; rm = n[2] ? RM_RTZ : 3'b000;
      in_valid = 1;
      e = rptoi(pa, u, n[2], es);
      @(posedge clk); #1 in_valid = 0;
      checks++;
      if (!out_valid || i !== e) begin failures++; if (failures < 10) $display("FAIL %h u%0d rm%0d es%0d got %h v%0d exp %h", pa, u, rm, es, i, out_valid, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
