// tb_posit_fma: self-checking testbench of the fused multiply-add unit.
//
// Operands are decoded with posit_decode, the unit's result encoded with
// posit_encode, and compared with the correctly rounded reference for
// fused, add and multiply kinds in es=2 and es=3. The cycle count from
// in_valid to out_valid is checked: 6 (fused), 4 (add), 4 (multiply).
// Watchdog included.
module tb_posit_fma;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, ng = 0, sub = 0, out_valid;
  fma_kind_t kind = FMA_FUSED;
  logic [31:0] pa, pb, pc, pr;
  logic [4:0] es = 2;
  unpacked_t a, b, c;
  result_t out;
  posit_decode da (.p(pa), .es(es), .o(a));
  posit_decode db (.p(pb), .es(es), .o(b));
  posit_decode dc (.p(pc), .es(es), .o(c));
  posit_fma dut (.*);
  posit_encode enc (.r(out), .es(es), .p(pr));
  int checks = 0, failures = 0;
  initial begin #20_000_000; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", w, g, e); end
  endtask
  initial begin
    int lat, want;
    logic [31:0] exp;
    pa = 0; pb = 0; pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      pa = rand_posit(); pb = rand_posit(); pc = rand_posit(); es = 5'(2 + n % 2);
      kind = fma_kind_t'(n % 3); ng = $urandom_range(0, 1); sub = $urandom_range(0, 1);
      in_valid = 1;
      unique case (kind)
        FMA_FUSED: begin exp = rfma(pa, pb, pc, ng, sub, es); want = 6; end
        FMA_ADD:   begin exp = rfma(pa, 32'h4000_0000, pc, ng, sub, es); want = 4; end
        default:   begin exp = rfma(pa, pb, 0, ng, 0, es); want = 4; end
      endcase
      @(posedge clk); #1 in_valid = 0; lat = 1;
      while (!out_valid) begin @(posedge clk); #1 lat++; end
      chk($sformatf("k%0d es%0d %h %h %h ng%0d sub%0d", kind, es, pa, pb, pc, ng, sub), pr, exp);
      chk("latency", 32'(lat), 32'(want));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
