// posit_fpu: the posit floating-point unit (F-extension operations on
// posits, plus FCVT.ES).
//
// Interface (the FPU start / get_rd / get_fflags interface as signals):
//   start_valid/start_ready with rs1, rs2, rs3, opcode (bits 5:2 of the
//   major opcode), funct7, funct3, imm (rs2-field bits 1:0, imm[0] = W vs WU),
//   es_mode (es of this operation), from_es/to_es (FCVT.ES only);
//   out_valid/out_ready with rd, fflags (only DZ can be set) and rd_is_int
//   (the result belongs in an integer register).
// The unit is blocking: start_ready is low from an accepted start until its
// result has been taken.
//
// Datapath (one OpCode decoder, three common decoders, one common encoder):
// on the accepting clock edge the operands are decoded and registered.
// Sign injection, min/max, compares, FMV and FCLASS work on the raw
// operands and write the output register on that same edge. The other
// operations start their unit in the next cycle, and the unit's unrounded
// result passes through the encoder into the output register; posit-to-int
// bypasses the encoder. Latencies, counted in clock edges from the edge
// that accepts start to the edge that raises out_valid:
//   FMADD/FMSUB/FNMSUB/FNMADD 8, FADD/FSUB 6, FMUL 6, FDIV 20, FSQRT 32,
//   FCVT.W[U].S 3, FCVT.S.W[U] 3, FCVT.ES 4, all others 1.
// These match the published latency table; the organisation around common
// decoders and one encoder follows the published datapath. FCVT.ES decodes
// with from_es and encodes with to_es through two pass-through stages.
// The blocking handshake and the illegal-op result (0, after 1 cycle) are
// this design's choices.
module posit_fpu
  import posit_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_valid,
  output logic          start_ready,
  input  logic [PS-1:0] rs1,
  input  logic [PS-1:0] rs2,
  input  logic [PS-1:0] rs3,
  input  logic [3:0]    opcode,
  input  logic [6:0]    funct7,
  input  logic [2:0]    funct3,
  input  logic [1:0]    imm,
  input  logic [4:0]    es_mode,
  input  logic [4:0]    from_es,
  input  logic [4:0]    to_es,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [PS-1:0] rd,
  output logic [4:0]    fflags,
  output logic          rd_is_int
);

  typedef enum logic [1:0] {S_IDLE, S_GO, S_WAIT, S_DONE} state_e;
  state_e state;

  // ---------------- accept: opcode decode, operand decode ----------------
  fpu_op_t   op_d, op_q;
  logic      int_d;
  logic [4:0] es_dec, es_enc_q;
  unpacked_t u1_d, u2_d, u3_d, u1_q, u2_q, u3_q;
  logic [PS-1:0] rs1_q;
  logic [2:0]    f3_q;
  logic          uns_q;
  logic          accept;

  posit_op_decode u_opdec (.opcode(opcode), .funct7(funct7), .funct3(funct3),
                           .op(op_d), .rd_is_int(int_d));

  assign es_dec = (op_d == OP_FCVT_ES) ? from_es : es_mode;

  posit_decode u_dec1 (.p(rs1), .es(es_dec), .o(u1_d));
  posit_decode u_dec2 (.p(rs2), .es(es_dec), .o(u2_d));
  posit_decode u_dec3 (.p(rs3), .es(es_dec), .o(u3_d));

  // single-cycle operations on the raw operands
  logic [PS-1:0] sgnj_y, cmp_y, cls_y, quick_y;
  logic          quick;
  posit_sgnj     u_sgnj (.a(rs1), .b(rs2), .funct3(funct3), .y(sgnj_y));
  posit_compare  u_cmp  (.a(rs1), .b(rs2), .funct3(funct3),
                         .is_minmax(op_d == OP_FMINMAX), .y(cmp_y));
  posit_classify u_cls  (.a(rs1), .y(cls_y));

  always_comb begin
    quick   = 1'b1;
    quick_y = '0;
    unique case (op_d)
      OP_FSGNJ:              quick_y = sgnj_y;
      OP_FMINMAX, OP_FCMP:   quick_y = cmp_y;
      OP_FCLASS:             quick_y = cls_y;
      OP_FMV_X_W, OP_FMV_W_X: quick_y = rs1;
      OP_ILLEGAL:            quick_y = '0;
      default:               quick   = 1'b0;
    endcase
  end

  assign start_ready = (state == S_IDLE);
  assign accept      = start_valid && start_ready;

  // ---------------- units ----------------
  logic go;
  assign go = (state == S_GO);

  fma_kind_t fma_kind;
  logic      fma_go, fma_ng, fma_sub, fma_v;
  unpacked_t fma_c;
  result_t   fma_r;
  always_comb begin
    fma_go   = go;
    fma_kind = FMA_FUSED;
    fma_ng   = 1'b0;
    fma_sub  = 1'b0;
    fma_c    = u3_q;
    unique case (op_q)
      OP_FMADD:  ;
      OP_FMSUB:  fma_sub = 1'b1;
      OP_FNMSUB: begin fma_ng = 1'b1; fma_sub = 1'b1; end
      OP_FNMADD: fma_ng = 1'b1;
      OP_FADD:   begin fma_kind = FMA_ADD; fma_c = u2_q; end
      OP_FSUB:   begin fma_kind = FMA_ADD; fma_c = u2_q; fma_sub = 1'b1; end
      OP_FMUL:   fma_kind = FMA_MUL;
      default:   fma_go = 1'b0;
    endcase
  end

  posit_fma u_fma (.clk(clk), .rst_n(rst_n), .in_valid(fma_go), .kind(fma_kind),
                   .ng(fma_ng), .sub(fma_sub), .a(u1_q), .b(u2_q), .c(fma_c),
                   .out_valid(fma_v), .out(fma_r));

  logic    div_v, div_dz, div_busy;
  result_t div_r;
  posit_div u_div (.clk(clk), .rst_n(rst_n), .in_valid(go && op_q == OP_FDIV),
                   .a(u1_q), .b(u2_q), .busy(div_busy), .out_valid(div_v),
                   .out(div_r), .dz(div_dz));

  logic    sqrt_v, sqrt_busy;
  result_t sqrt_r;
  posit_sqrt u_sqrt (.clk(clk), .rst_n(rst_n), .in_valid(go && op_q == OP_FSQRT),
                     .a(u1_q), .busy(sqrt_busy), .out_valid(sqrt_v), .out(sqrt_r));

  result_t itop_d, itop_q;
  logic    itop_v;
  posit_itop u_itop (.i(rs1_q), .u(uns_q), .o(itop_d));

  logic          ptoi_v;
  logic [PS-1:0] ptoi_i;
  posit_ptoi u_ptoi (.clk(clk), .rst_n(rst_n), .in_valid(go && op_q == OP_FCVT_W_S),
                     .a(u1_q), .u(uns_q), .rm(f3_q), .out_valid(ptoi_v), .i(ptoi_i));

  // es conversion: decoded operand re-packed, two pass-through stages
  result_t cvt_d, cvt1_q, cvt2_q;
  logic    cvt1_v, cvt2_v;
  always_comb begin
    cvt_d.zero   = u1_q.zero;
    cvt_d.nar    = u1_q.nar;
    cvt_d.sign   = u1_q.sign;
    cvt_d.exp    = u1_q.exp;
    cvt_d.sig    = {u1_q.frac, {(SIGW-FW){1'b0}}};
    cvt_d.sticky = 1'b0;
  end

  // ---------------- common encoder and output mux ----------------
  result_t       enc_in;
  logic          enc_v;
  logic [PS-1:0] enc_p;
  always_comb begin
    enc_v  = 1'b1;
    enc_in = fma_r;
    if (fma_v)       enc_in = fma_r;
    else if (div_v)  enc_in = div_r;
    else if (sqrt_v) enc_in = sqrt_r;
    else if (itop_v) enc_in = itop_q;
    else if (cvt2_v) enc_in = cvt2_q;
    else             enc_v  = 1'b0;
  end

  posit_encode u_enc (.r(enc_in), .es(es_enc_q), .p(enc_p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      op_q <= OP_ILLEGAL; u1_q <= '0; u2_q <= '0; u3_q <= '0;
      rs1_q <= '0; f3_q <= '0; uns_q <= 1'b0; es_enc_q <= 5'(ES_MIN);
      itop_q <= '0; itop_v <= 1'b0;
      cvt1_q <= '0; cvt2_q <= '0; cvt1_v <= 1'b0; cvt2_v <= 1'b0;
      out_valid <= 1'b0; rd <= '0; fflags <= '0; rd_is_int <= 1'b0;
    end else begin
      itop_v <= go && op_q == OP_FCVT_S_W;
      itop_q <= itop_d;
      cvt1_v <= go && op_q == OP_FCVT_ES;
      cvt1_q <= cvt_d;
      cvt2_v <= cvt1_v;
      cvt2_q <= cvt1_q;
      unique case (state)
        S_IDLE: if (accept) begin
          op_q     <= op_d;
          u1_q     <= u1_d;
          u2_q     <= u2_d;
          u3_q     <= u3_d;
          rs1_q    <= rs1;
          f3_q     <= funct3;
          uns_q    <= imm[0];
          es_enc_q <= (op_d == OP_FCVT_ES) ? to_es : es_mode;
          rd_is_int <= int_d;
          fflags   <= '0;
          if (quick) begin
            rd        <= quick_y;
            out_valid <= 1'b1;
            state     <= S_DONE;
          end else begin
            state <= S_GO;
          end
        end
        S_GO: state <= S_WAIT;
        S_WAIT: begin
          if (enc_v) begin
            rd        <= enc_p;
            out_valid <= 1'b1;
            if (div_v && div_dz) fflags[FFLAG_DZ] <= 1'b1;
            state     <= S_DONE;
          end else if (ptoi_v) begin
            rd        <= ptoi_i;
            out_valid <= 1'b1;
            state     <= S_DONE;
          end
        end
        S_DONE: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({fma_v, div_v, sqrt_v, itop_v, cvt2_v, ptoi_v}));

endmodule
