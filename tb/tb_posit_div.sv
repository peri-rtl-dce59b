// tb_posit_div: self-checking testbench of the divider.
//
// Random and directed operands are decoded, divided, encoded and compared
// with the correctly rounded reference quotient in es=2 and es=3; DZ is
// checked, and the cycle count from in_valid to out_valid must be 18
// (load, 16 iterations, normalise). Watchdog included.
module tb_posit_div;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid, busy, dz;
  logic [31:0] pa, pb, pr;
  logic [4:0] es = 2;
  unpacked_t a, b;
  result_t out;
  posit_decode da (.p(pa), .es(es), .o(a));
  posit_decode db (.p(pb), .es(es), .o(b));
  posit_div dut (.*);
  posit_encode enc (.r(out), .es(es), .p(pr));
  int checks = 0, failures = 0;
  initial begin #20_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", w, g, e); end
  endtask
  initial begin
    int lat;
    pa = 0; pb = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      pa = rand_posit(); pb = (n % 50 == 0) ? 32'h0 : rand_posit(); es = 5'(2 + n % 2);
      in_valid = 1;
      @(posedge clk); #1 in_valid = 0; lat = 1;
      while (!out_valid) begin @(posedge clk); #1 lat++; end
      chk($sformatf("es%0d %h/%h", es, pa, pb), pr, rdiv(pa, pb, es));
      chk("dz", 32'(dz), 32'(pb == 0 && pa != R_NAR));
      chk("latency", 32'(lat), 32'd18);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
