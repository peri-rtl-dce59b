// tb_posit_fpu: self-checking testbench of the posit FPU.
//
// Random operands (biased to zero, NaR, extremes and values near 1) are
// run through every operation in es=2 and es=3 and compared with the
// reference model posit_ref_pkg (correctly rounded, built on wide
// integers). The cycle count from the accepting clock edge to out_valid is
// checked for every operation against the latency table (FMA 8, FADD/FSUB/
// FMUL 6, FDIV 20, FSQRT 32, conversions 3, FCVT.ES 4, others 1), and DZ is
// checked on division by zero. A watchdog ends the run if the FPU hangs.
module tb_posit_fpu;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start_valid, start_ready, out_valid, out_ready, rd_is_int;
  logic [31:0] rs1, rs2, rs3, rd;
  logic [3:0]  opcode;
  logic [6:0]  funct7;
  logic [2:0]  funct3;
  logic [1:0]  imm;
  logic [4:0]  es_mode, from_es, to_es, fflags;

  posit_fpu dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #50_000_000;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  // run one operation, return result, flags and latency
  task automatic run(input logic [3:0] opc, input logic [6:0] f7, input logic [2:0] f3,
                     input logic [1:0] im, input logic [31:0] a, b, c,
                     input logic [4:0] es, input logic [4:0] fe, input logic [4:0] te,
                     output logic [31:0] res, output logic [4:0] fl, output int lat);
    @(negedge clk);
    start_valid = 1'b1;
    rs1 = a; rs2 = b; rs3 = c; opcode = opc; funct7 = f7; funct3 = f3; imm = im;
    es_mode = es; from_es = fe; to_es = te;
    @(posedge clk);
    lat = 0;
    #1 start_valid = 1'b0;
    while (!out_valid) begin
      @(posedge clk); #1;
      lat++;
    end
    lat++;  // the accepting edge
    res = rd;
    fl  = fflags;
    @(negedge clk);
    out_ready = 1'b1;
    @(posedge clk); #1;
    out_ready = 1'b0;
  endtask

  logic [31:0] a, b, c, r, e;
  logic [4:0]  fl;
  int lat, es;
  int dz_seen = 0;

  initial begin
    start_valid = 0; out_ready = 0; rs1 = 0; rs2 = 0; rs3 = 0;
    opcode = 0; funct7 = 0; funct3 = 0; imm = 0; es_mode = 2; from_es = 2; to_es = 2;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int n = 0; n < 600; n++) begin
      es = 2 + (n & 1);
      a = rand_posit(); b = rand_posit(); c = rand_posit();
      // fused ops
      for (int f = 0; f < 4; f++) begin
        run(4'(f), 7'b0, 3'b0, 2'b0, a, b, c, 5'(es), 5'(es), 5'(es), r, fl, lat);
        e = rfma(a, b, c, f[1], f[0] ^ f[1], es);
        check($sformatf("fma%0d es%0d %h %h %h", f, es, a, b, c), r, e);
        check("fma latency", 32'(lat), 32'd8);
      end
      run(4'b0100, 7'b0000000, 3'b0, 2'b0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check($sformatf("fadd %h %h", a, b), r, rfma(a, 32'h4000_0000, b, 0, 0, es));
      check("fadd latency", 32'(lat), 32'd6);
      run(4'b0100, 7'b0000100, 3'b0, 2'b0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check($sformatf("fsub %h %h", a, b), r, rfma(a, 32'h4000_0000, b, 0, 1, es));
      check("fsub latency", 32'(lat), 32'd6);
      run(4'b0100, 7'b0001000, 3'b0, 2'b0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check($sformatf("fmul %h %h", a, b), r, rfma(a, b, 0, 0, 0, es));
      check("fmul latency", 32'(lat), 32'd6);
      run(4'b0100, 7'b0001100, 3'b0, 2'b0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check($sformatf("fdiv es%0d %h %h", es, a, b), r, rdiv(a, b, es));
      check("fdiv latency", 32'(lat), 32'd20);
      check("fdiv dz", 32'(fl[FFLAG_DZ]), 32'(b == 0 && a != R_NAR));
      if (fl[FFLAG_DZ]) dz_seen++;
      run(4'b0100, 7'b0101100, 3'b0, 2'b0, a, 0, 0, 5'(es), 0, 0, r, fl, lat);
      check($sformatf("fsqrt es%0d %h", es, a), r, rsqrt(a, es));
      check("fsqrt latency", 32'(lat), 32'd32);
      // conversions
      for (int u = 0; u < 2; u++) begin
        run(4'b0100, 7'b1100000, (n % 3 == 0) ? RM_RTZ : 3'b000, 2'(u), a, 0, 0, 5'(es), 0, 0, r, fl, lat);
        check($sformatf("fcvt.w u%0d es%0d %h", u, es, a), r, rptoi(a, u[0], n % 3 == 0, es));
        check("fcvt.w latency", 32'(lat), 32'd3);
        run(4'b0100, 7'b1101000, 3'b0, 2'(u), b, 0, 0, 5'(es), 0, 0, r, fl, lat);
        check($sformatf("fcvt.s.w u%0d %h", u, b), r, ritop(b, u[0], es));
        check("fcvt.s.w latency", 32'(lat), 32'd3);
      end
      run(4'b0100, 7'b1111100, 3'b0, 2'b0, a, 0, 0, 5'(es), 5'(es), 5'(5 - es), r, fl, lat);
      check($sformatf("fcvt.es %0d %h", es, a), r, rcvtes(a, es, 5 - es));
      check("fcvt.es latency", 32'(lat), 32'd4);
      // single-cycle operations
      run(4'b0100, 7'b0010000, 3'b000, 0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check("fsgnj", r, (a[31] == b[31]) ? a : -a);
      check("fsgnj latency", 32'(lat), 32'd1);
      run(4'b0100, 7'b0010000, 3'b010, 0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check("fsgnjx", r, b[31] ? -a : a);
      run(4'b0100, 7'b0010100, 3'b000, 0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check("fmin", r, ($signed(a) < $signed(b)) ? a : b);
      run(4'b0100, 7'b0010100, 3'b001, 0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check("fmax", r, ($signed(a) < $signed(b)) ? b : a);
      run(4'b0100, 7'b1010000, 3'b001, 0, a, b, 0, 5'(es), 0, 0, r, fl, lat);
      check("flt", r, 32'($signed(a) < $signed(b)));
      check("flt latency", 32'(lat), 32'd1);
      check("flt is int", 32'(rd_is_int), 32'd1);
      run(4'b0100, 7'b1010000, 3'b010, 0, a, a, 0, 5'(es), 0, 0, r, fl, lat);
      check("feq", r, 32'd1);
      run(4'b0100, 7'b1110000, 3'b001, 0, a, 0, 0, 5'(es), 0, 0, r, fl, lat);
      check("fclass", r, (a == 0) ? 32'h10 : (a == R_NAR) ? 32'h200 : a[31] ? 32'h2 : 32'h40);
      run(4'b0100, 7'b1111000, 3'b000, 0, a, 0, 0, 5'(es), 0, 0, r, fl, lat);
      check("fmv.w.x", r, a);
    end
    // directed: 1.0 / 0 raises DZ, 2.0 / 4.0 = 0.5 in es=2
    run(4'b0100, 7'b0001100, 3'b0, 2'b0, 32'h4000_0000, 0, 0, 5'd2, 0, 0, r, fl, lat);
    check("1/0 NaR", r, R_NAR);
    check("1/0 DZ", 32'(fl), 32'h8);
    run(4'b0100, 7'b0001100, 3'b0, 2'b0, 32'h4800_0000, 32'h5000_0000, 0, 5'd2, 0, 0, r, fl, lat);
    check("2/4", r, 32'h3800_0000);
    checks++;
    if (dz_seen == 0) begin failures++; $display("FAIL no random DZ"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
