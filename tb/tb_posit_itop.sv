// tb_posit_itop: self-checking testbench of integer-to-posit conversion.
// Random and edge integers (0, +-1, extremes), signed and unsigned, are
// converted and encoded in es=2 and es=3 and compared with the correctly
// rounded reference. Combinational block: results are sampled after #1.
// Watchdog included.
module tb_posit_itop;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic [31:0] i, pr;
  logic u;
  logic [4:0] es;
  result_t o;
  posit_itop dut (.i, .u, .o);
  posit_encode enc (.r(o), .es(es), .p(pr));
  int checks = 0, failures = 0;
  initial begin #10_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    logic [31:0] edges [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'h0100_0001};
    for (int n = 0; n < 20000; n++) begin
      i = (n < 24) ? edges[n % 6] : $urandom >> $urandom_range(0, 31);
      u = n[0]; es = 5'(2 + n[1]);
      #1;
      checks++;
      if (pr !== ritop(i, u, es)) begin failures++; if (failures < 10) $display("FAIL %h u%0d es%0d got %h exp %h", i, u, es, pr, ritop(i, u, es)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
