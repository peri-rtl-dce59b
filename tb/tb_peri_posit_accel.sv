// tb_peri_posit_accel: end-to-end testbench of the posit co-processor.
//
// Plays the core side of the RoCC interface and a simple data cache (word
// memory, one-cycle read answer) and runs a posit program at the default
// parameters: posit loads fill the register file, then directed and random
// custom instructions (all arithmetic, conversions, compares, sign
// injection, classify, FCVT.ES, fused R4 ops) are issued with xd=1 (result
// checked in the response) or xd=0 (result kept in a shadow register file
// and checked later through posit stores to memory). Results are compared
// with the reference model posit_ref_pkg. The es-mode is switched through
// the CSR port, and DZ is read back after a division by zero.
// Every mechanism is counted; the run fails if any count stays at zero.
// Response latency of FPU commands is checked against the FPU latency plus
// one cycle for the registered response. Watchdog included.
module tb_peri_posit_accel;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cmd_valid, cmd_ready, resp_valid, resp_ready, resp_wen, busy;
  logic [31:0] cmd_inst, cmd_rs1, cmd_rs2, resp_data;
  logic [4:0]  resp_rd;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [31:0] mem_req_addr, mem_req_wdata, mem_resp_data;
  logic        csr_en;
  logic [11:0] csr_addr;
  logic [1:0]  csr_op;
  logic [31:0] csr_wdata, csr_rdata;

  peri_posit_accel dut (.*);

  // ---------------- data cache model ----------------
  logic [31:0] mem [1024];
  assign mem_req_ready = 1'b1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_resp_valid <= 1'b0;
      mem_resp_data  <= '0;
    end else begin
      mem_resp_valid <= mem_req_valid && !mem_req_we;
      mem_resp_data  <= mem[mem_req_addr[11:2]];
      if (mem_req_valid && mem_req_we) mem[mem_req_addr[11:2]] <= mem_req_wdata;
    end
  end

  int checks = 0, failures = 0;
  int cnt [string];

  initial begin
    #50_000_000;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; if (failures < 20) $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  function automatic logic [31:0] rtype(logic [6:0] f7, logic [4:0] r2, logic [4:0] r1,
                                        bit xd, bit xs1, bit xs2, logic [4:0] rd);
    return {f7, r2, r1, xd, xs1, xs2, rd, 7'b0001011};
  endfunction
  function automatic logic [31:0] r4(logic [4:0] r3, logic [1:0] f2, logic [4:0] r2,
                                     logic [4:0] r1, logic [4:0] rd);
    return {r3, f2, r2, r1, 3'b000, rd, 7'b0101011};
  endfunction
  function automatic logic [31:0] pload(logic [11:0] imm, logic [4:0] rd);
    return {imm, 5'd0, 3'b010, rd, 7'b1011011};
  endfunction
  function automatic logic [31:0] pstore(logic [11:0] imm, logic [4:0] rs2);
    return {imm[11:5], rs2, 5'd0, 3'b010, imm[4:0], 7'b1111011};
  endfunction

  // issue one command, wait for its response
  task automatic issue(logic [31:0] inst, logic [31:0] r1, logic [31:0] r2,
                       output logic [31:0] data, output logic wen, output int lat);
    @(negedge clk);
    cmd_valid = 1; cmd_inst = inst; cmd_rs1 = r1; cmd_rs2 = r2;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(posedge clk); #1 lat++; end
    data = resp_data; wen = resp_wen;
    chk("resp rd", 32'(resp_rd), 32'(inst[11:7]));
    @(negedge clk); resp_ready = 1; @(posedge clk); #1 resp_ready = 0;
  endtask

  task automatic csr(logic [11:0] ad, logic [1:0] op, logic [31:0] wd, output logic [31:0] old);
    @(negedge clk); csr_en = 1; csr_addr = ad; csr_op = op; csr_wdata = wd;
    #1 old = csr_rdata;
    @(negedge clk); csr_en = 0; csr_op = 0;
  endtask

  logic [31:0] shadow [32];
  int es_cur = 2;

  // reference result of an R-type operation in the current es
  function automatic logic [31:0] ref_op(int k, logic [31:0] a, logic [31:0] b);
    case (k)
      0: return rfma(a, 32'h4000_0000, b, 0, 0, es_cur);   // FADD
      1: return rfma(a, 32'h4000_0000, b, 0, 1, es_cur);   // FSUB
      2: return rfma(a, b, 0, 0, 0, es_cur);               // FMUL
      3: return rdiv(a, b, es_cur);                        // FDIV
      4: return rsqrt(a, es_cur);                          // FSQRT
      5: return ($signed(a) < $signed(b)) ? a : b;         // FMIN
      6: return (a[31] == b[31]) ? a : -a;                 // FSGNJ
      default: return 0;
    endcase
  endfunction
  localparam logic [6:0] F7S [7] = '{7'b0000000, 7'b0000100, 7'b0001000, 7'b0001100,
                                     7'b0101100, 7'b0010100, 7'b0010000};
  localparam string NAMES [7] = '{"fadd", "fsub", "fmul", "fdiv", "fsqrt", "fmin", "fsgnj"};
  localparam int    FLAT  [7] = '{6, 6, 6, 20, 32, 1, 1};

  initial begin
    logic [31:0] d, e, old;
    logic w;
    int lat, k, rs1f, rs2f, rs3f, rdf;
    cmd_valid = 0; cmd_inst = 0; cmd_rs1 = 0; cmd_rs2 = 0; resp_ready = 0;
    csr_en = 0; csr_addr = 0; csr_op = 0; csr_wdata = 0;
    for (int i = 0; i < 1024; i++) mem[i] = (i < 64) ? rand_posit() : 32'h0;
    for (int i = 0; i < 32; i++) shadow[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // posit loads: p1..p31 <- mem[0x40 + 4*i], base from the core
    for (int i = 1; i < 32; i++) begin
      issue(pload(12'(4 * i), 5'(i)), 32'h40, 0, d, w, lat);
      shadow[i] = mem[16 + i];
      cnt["load"]++;
    end

    for (int n = 0; n < 400; n++) begin
      // switch es every 100 instructions through the CSR
      if (n % 100 == 50) begin
        es_cur = 5 - es_cur;
        csr(12'h003, 2'b01, 32'(es_cur << 8), old);
        cnt["es_switch"]++;
      end
      rs1f = $urandom_range(0, 31); rs2f = $urandom_range(0, 31);
      rs3f = $urandom_range(0, 31); rdf = $urandom_range(1, 31);
      case ($urandom_range(0, 5))
        0, 1: begin   // R-type arithmetic / min / sgnj
          k = $urandom_range(0, 6);
          w = $urandom_range(0, 1);
          e = ref_op(k, shadow[rs1f], shadow[rs2f]);
          issue(rtype(F7S[k], (k == 4) ? 5'd0 : 5'(rs2f), 5'(rs1f), w, 0, 0, 5'(rdf)), 0, 0, d, old[0], lat);
          if (w) begin chk($sformatf("%s resp", NAMES[k]), d, e); cnt["xd_resp"]++; end
          else shadow[rdf] = e;
          chk("wen", 32'(old[0]), 32'(w));
          chk($sformatf("%s latency", NAMES[k]), 32'(lat), 32'(FLAT[k] + 1));
          cnt[NAMES[k]]++;
        end
        2: begin      // fused R4
          k = $urandom_range(0, 3);
          e = rfma(shadow[rs1f], shadow[rs2f], shadow[rs3f], k[1], k[0] ^ k[1], es_cur);
          issue(r4(5'(rs3f), 2'(k), 5'(rs2f), 5'(rs1f), 5'(rdf)), 0, 0, d, w, lat);
          shadow[rdf] = e;
          chk("fma latency", 32'(lat), 32'd9);
          cnt["fused"]++;
        end
        3: begin      // posit -> int, RNE or RTZ, result to the core
          k = $urandom_range(0, 1);
          issue(rtype(7'b1100000, {k[0] ? RM_RTZ : 3'b000, 2'b00}, 5'(rs1f), 1, 0, 0, 5'(rdf)), 0, 0, d, w, lat);
          chk("fcvt.w.s", d, rptoi(shadow[rs1f], 0, k[0], es_cur));
          chk("fcvt.w.s wen", 32'(w), 1);
          chk("fcvt.w.s latency", 32'(lat), 32'd4);
          cnt["ptoi"]++;
          if (k[0]) cnt["rtz"]++;
        end
        4: begin      // int -> posit from the core register, then compare
          d = $urandom >> $urandom_range(0, 31);
          issue(rtype(7'b1101000, 5'd0, 5'd0, 0, 1, 0, 5'(rdf)), d, 0, old, w, lat);
          shadow[rdf] = ritop(d, 0, es_cur);
          chk("fcvt.s.w latency", 32'(lat), 32'd4);
          cnt["itop"]++;
          issue(rtype(7'b1010001, 5'(rs2f), 5'(rdf), 0, 0, 0, 5'(rdf)), 0, 0, d, w, lat);
          chk("flt", d, 32'($signed(shadow[rdf]) < $signed(shadow[rs2f])));
          chk("flt wen", 32'(w), 1);
          cnt["compare"]++;
        end
        default: begin // es conversion in place, and classify
          issue(rtype(7'b1111100, 5'(5 - es_cur), 5'(es_cur), 0, 0, 0, 5'(rdf)), 0, 0, d, w, lat);
          e = rcvtes(shadow[rdf], es_cur, 5 - es_cur);
          chk("fcvt.es latency", 32'(lat), 32'd5);
          issue(rtype(7'b1110001, 5'd0, 5'(rdf), 1, 0, 0, 5'(rdf)), 0, 0, d, w, lat);
          chk("fclass", d, (e == 0) ? 32'h10 : (e == R_NAR) ? 32'h200 : e[31] ? 32'h2 : 32'h40);
          shadow[rdf] = e;
          cnt["cvt_es"]++;
          cnt["classify"]++;
        end
      endcase
      // every 40 instructions store all registers and compare
      if (n % 40 == 39) begin
        for (int r = 0; r < 32; r++) begin
          issue(pstore(12'(4 * r), 5'(r)), 32'h800, 0, d, w, lat);
          chk($sformatf("store p%0d", r), mem[512 + r], shadow[r]);
          cnt["store"]++;
        end
      end
    end

    // divide by zero raises DZ in the CSR (operands made with FCVT.S.W)
    csr(12'h001, 2'b01, 0, old);
    issue(rtype(7'b1101000, 5'd0, 5'd0, 0, 1, 0, 5'd7), 32'd0, 0, d, w, lat);   // p7 = 0
    issue(rtype(7'b1101000, 5'd0, 5'd0, 0, 1, 0, 5'd6), 32'd3, 0, d, w, lat);   // p6 = 3
    issue(rtype(7'b0001100, 5'd7, 5'd6, 1, 0, 0, 5'd5), 0, 0, d, w, lat);
    chk("3/0", d, R_NAR);
    csr(12'h001, 2'b00, 0, old);
    chk("DZ flag", old, 32'h8);
    if (old == 32'h8) cnt["dz"]++;

    foreach (cnt[s]) $display("mechanism %-10s %0d", s, cnt[s]);
    begin
      string need [] = '{"load", "store", "fadd", "fsub", "fmul", "fdiv", "fsqrt", "fmin", "fsgnj",
                         "fused", "ptoi", "rtz", "itop", "compare", "cvt_es", "classify",
                         "es_switch", "xd_resp", "dz"};
      foreach (need[j]) begin
        checks++;
        if (!cnt.exists(need[j]) || cnt[need[j]] == 0) begin
          failures++; $display("FAIL mechanism %s never happened", need[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
