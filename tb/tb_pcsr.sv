// tb_pcsr: self-checking testbench of the posit CSR.
// Checks the reset value (es-mode 2), writes, sets and clears through the
// FFLAGS, FRM and PCSR views, that only DZ is kept in fflags, that rm reads
// 0, that es-mode accepts only 2 and 3, and that FPU flags accumulate.
// Register updates are checked one cycle after the write. Watchdog.
module tb_pcsr;
  import posit_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic csr_en = 0, flag_valid = 0;
  logic [11:0] csr_addr = 0; logic [1:0] csr_op = 0;
  logic [31:0] csr_wdata = 0, csr_rdata;
  logic [4:0] flags = 0, es_mode;
  pcsr dut (.*);
  int checks = 0, failures = 0;
  initial begin #1_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask
  task automatic acc(logic [11:0] ad, logic [1:0] op, logic [31:0] wd);
    @(negedge clk); csr_en = 1; csr_addr = ad; csr_op = op; csr_wdata = wd;
    @(negedge clk); csr_en = 0; csr_op = 0;
  endtask
  task automatic rd(logic [11:0] ad, logic [31:0] e, string w);
    @(negedge clk); csr_addr = ad; #1 chk(w, csr_rdata, e);
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    chk("reset es", 32'(es_mode), 2);
    rd(12'h003, 32'h0000_0200, "reset pcsr");
    acc(12'h003, 2'b01, 32'h0000_03ff); // es=3, all flags, rm=7
    rd(12'h003, 32'h0000_0308, "write pcsr");
    chk("es3", 32'(es_mode), 3);
    rd(12'h002, 0, "frm zero");
    acc(12'h003, 2'b01, 32'h0000_0500); // es=5 illegal: kept
    chk("es illegal", 32'(es_mode), 3);
    rd(12'h001, 0, "flags cleared");
    @(negedge clk); flag_valid = 1; flags = 5'h1f; @(negedge clk); flag_valid = 0;
    rd(12'h001, 32'h8, "flag accumulate");
    acc(12'h001, 2'b11, 32'h8);
    rd(12'h001, 0, "flag clear");
    acc(12'h001, 2'b10, 32'h8);
    rd(12'h001, 32'h8, "flag set");
    acc(12'h003, 2'b11, 32'h0000_0100); // clear es bit 0: 3 -> 2
    chk("es clear", 32'(es_mode), 2);
    acc(12'h002, 2'b01, 32'h7);
    rd(12'h002, 0, "frm write ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
