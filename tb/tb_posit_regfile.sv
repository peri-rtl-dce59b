// tb_posit_regfile: self-checking testbench of the posit register file.
// Checks that every register resets to zero, then performs random writes
// against a shadow array and checks all three read ports, including a read
// of the register written in the same cycle (old value). Watchdog.
module tb_posit_regfile;
  import posit_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] ra1, ra2, ra3, wa; logic [31:0] rd1, rd2, rd3, wd; logic we = 0;
  posit_regfile dut (.*);
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;
  initial begin #10_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", w, g, e); end
  endtask
  initial begin
    ra1 = 0; ra2 = 0; ra3 = 0; wa = 0; wd = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 32; r++) begin shadow[r] = 0; ra1 = 5'(r); #1 chk("reset", rd1, 0); end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom;
      ra1 = 5'($urandom); ra2 = wa; ra3 = 5'($urandom);
      #1;
      chk("rd1", rd1, shadow[ra1]); chk("rd2", rd2, shadow[ra2]); chk("rd3", rd3, shadow[ra3]);
      @(posedge clk); if (we) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
