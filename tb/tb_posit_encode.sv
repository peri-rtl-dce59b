// tb_posit_encode: self-checking test of the common posit encoder.
// Random sign/exponent/significand/sticky inputs (exponents past maxpos and
// minpos included) are encoded for es=2 and es=3 and compared with a
// reference that writes the regime, exponent and fraction bit by bit and
// rounds to nearest even. Decoding then re-encoding any posit must give it
// back unchanged, and the zero and NaR flags must override.
module tb_posit_encode;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  result_t     r;
  logic [4:0]  es;
  logic [31:0] p;
  logic [31:0] pin;
  unpacked_t   d;
  logic [31:0] p2;
  result_t     r2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  posit_encode dut (.r(r), .es(es), .p(p));
  posit_decode u_dec (.p(pin), .es(es), .o(d));
  posit_encode u_enc2 (.r(r2), .es(es), .p(p2));

  always_comb begin
    r2 = '{zero: d.zero, nar: d.nar, sign: d.sign, exp: d.exp, sig: {d.frac, 4'b0}, sticky: 1'b0};
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [31:0] exp_p;
    int ees;
    for (int i = 0; i < 20000; i++) begin
      ees = (i % 2) ? 3 : 2;
      es = 5'(ees);
      r.zero = 1'b0;
      r.nar = 1'b0;
      r.sign = $urandom_range(0, 1);
      r.exp = exp_t'($signed($urandom_range(0, 560)) - 280);
      r.sig = {1'b1, 31'($urandom)};
      if ($urandom_range(0, 3) == 0) r.sig[20:0] = '0;
      r.sticky = ($urandom_range(0, 2) == 0);
      #1;
      exp_p = rencode(r.sign, int'(r.exp), {r.sig, 96'b0}, r.sticky, ees);
      checks++;
      if (p !== exp_p) begin
        failures++;
        if (failures < 10) $display("FAIL es=%0d s=%0d exp=%0d sig=%h st=%0d got %h exp %h",
                                    ees, r.sign, r.exp, r.sig, r.sticky, p, exp_p);
      end
      // round trip
      pin = rand_posit();
      #1;
      checks++;
      if (p2 !== pin) begin
        failures++;
        if (failures < 10) $display("FAIL roundtrip es=%0d %h -> %h", ees, pin, p2);
      end
    end
    r.zero = 1'b1; #1; checks++; if (p !== 32'h0) failures++;
    r.nar = 1'b1; #1; checks++; if (p !== 32'h8000_0000) failures++;
    // 1.2 in es=2 rounds to 0x4199999A
    r = '{zero: 1'b0, nar: 1'b0, sign: 1'b0, exp: '0, sig: 32'h9999_9999, sticky: 1'b1};
    es = 5'd2; #1; checks++;
    if (p !== 32'h4199_999A) begin failures++; $display("FAIL 1.2 -> %h", p); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
