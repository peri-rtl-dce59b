// tb_posit_decode: self-checking test of the common posit decoder.
// Random and extreme posits are decoded for es=2 and es=3 and every field
// is compared with a bit-walking reference decoder. Known values: 1.5 is
// 0x44000000 and 1.2 rounds to 0x4199999A in es=2.
module tb_posit_decode;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  logic [31:0] p;
  logic [4:0]  es;
  unpacked_t   o;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  posit_decode dut (.p(p), .es(es), .o(o));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [31:0] pp, input int ees);
    bit z, n, s;
    int sc;
    bit [27:0] sg;
    p = pp; es = 5'(ees);
    #1;
    rdecode(pp, ees, z, n, s, sc, sg);
    checks++;
    if (o.zero !== z || o.nar !== n || (!z && !n && (o.sign !== s || int'(o.exp) != sc || o.frac !== sg))) begin
      failures++;
      if (failures < 10)
        $display("FAIL p=%h es=%0d got z%0d n%0d s%0d exp%0d f%h exp z%0d n%0d s%0d exp%0d f%h",
                 pp, ees, o.zero, o.nar, o.sign, o.exp, o.frac, z, n, s, sc, sg);
    end
  endtask

  initial begin
    // 1.5 in es=2: sign 0, exp 0, frac 1.1
    p = 32'h4400_0000; es = 5'd2; #1;
    checks++;
    if (o.exp != 0 || o.frac != 28'hC00_0000 || o.sign) failures++;
    // maxpos es=3: exp = 30*8 = 240
    p = 32'h7fff_ffff; es = 5'd3; #1;
    checks++;
    if (o.exp != 240) failures++;
    // minpos es=2: exp = -30*4 = -120
    p = 32'h0000_0001; es = 5'd2; #1;
    checks++;
    if (o.exp != -120) failures++;
    for (int i = 0; i < 20000; i++) begin
      check_one(rand_posit(), (i % 2) ? 3 : 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
