// peri_posit_accel: posit co-processor attached to a RISC-V core over a
// RoCC-style command/response interface (the loosely-coupled PERI variant).
//
// Blocks: a posit register file (posit_regfile), the posit FPU (posit_fpu),
// the posit CSR (pcsr) and a control FSM that decodes RoCC instructions and
// talks to the data cache for posit loads and stores.
//
// Command (cmd_valid/cmd_ready): cmd_inst is the 32-bit instruction, cmd_rs1
// and cmd_rs2 the core's integer source values. RoCC fields: funct7 31:25,
// rs2 24:20, rs1 19:15, xd 14, xs1 13, xs2 12, rd 11:7, opcode 6:0.
//   custom-0 (0001011) R-type arithmetic: funct7[6:2] is the F-extension
//     funct7[6:2], funct7[1:0] the variant normally held in funct3 (sign
//     injection, min/max, compare, FMV.X.W/FCLASS). xs1/xs2 take the source
//     from the core instead of the posit registers. FCVT.W[U].S and
//     FCVT.S.W[U] use rs2[0] as W/WU select and rs2[4:2] as rm.
//     FCVT.ES (funct7 1111100): rs1 field = from-es, rs2 field = to-es,
//     operand and destination = posit register rd.
//   custom-1 (0101011) R4-type fused multiply-add: rs3 = 31:27, 26:25 = 00
//     FMADD, 01 FMSUB, 10 FNMSUB, 11 FNMADD; xs1/xs2 as for custom-0, rs3
//     always from the posit registers.
//   custom-2 (1011011) posit load: posit rd <= mem[cmd_rs1 + imm12 (31:20)];
//     the base address is always the core's rs1 value.
//   custom-3 (1111011) posit store: mem[cmd_rs1 + imm12 {31:25,11:7}] <=
//     posit rs2.
// Every command gets one response (resp_valid/resp_ready) once it has
// completed. With xd=1 (or for a result that is an integer: compares,
// FCVT.W, FMV.X.W, FCLASS) the result is returned in resp_data for integer
// register resp_rd and resp_wen is 1; otherwise it is written to the posit
// register rd and resp_wen is 0. busy is high while a command is in flight.
// Memory (mem_req_* / mem_resp_*): one 32-bit word request at a time; a read
// is answered by mem_resp_valid with mem_resp_data, a write needs no answer.
// CSR port (csr_*): the core's access to the posit CSR; its es-mode sets
// the es of every operation, the FPU's DZ flag is accumulated in it.
//
// Follows the original design: co-processor with its own register file,
// reached through RoCC at write-back, D-cache access for posit loads and
// stores, CSR control of es. This design's choices: the opcode and field
// mapping above, one command at a time, a response for every command.
module peri_posit_accel
  import posit_pkg::*;
#(
  parameter int unsigned NREGS    = 32,
  parameter logic [4:0]  ES_RESET = 5'd2
) (
  input  logic        clk,
  input  logic        rst_n,
  // RoCC command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [31:0] cmd_inst,
  input  logic [31:0] cmd_rs1,
  input  logic [31:0] cmd_rs2,
  // RoCC response
  output logic        resp_valid,
  input  logic        resp_ready,
  output logic [4:0]  resp_rd,
  output logic [31:0] resp_data,
  output logic        resp_wen,
  output logic        busy,
  // data-cache port
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic [31:0] mem_req_addr,
  output logic        mem_req_we,
  output logic [31:0] mem_req_wdata,
  input  logic        mem_resp_valid,
  input  logic [31:0] mem_resp_data,
  // CSR access from the core
  input  logic        csr_en,
  input  logic [11:0] csr_addr,
  input  logic [1:0]  csr_op,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata
);

  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;
  localparam logic [6:0] OPC_CUSTOM1 = 7'b0101011;
  localparam logic [6:0] OPC_CUSTOM2 = 7'b1011011;
  localparam logic [6:0] OPC_CUSTOM3 = 7'b1111011;
  localparam logic [6:0] F7_FCVT_ES  = 7'b1111100;
  localparam logic [6:0] F7_FCVT_W   = 7'b1100000;
  localparam logic [6:0] F7_FCVT_S_W = 7'b1101000;

  typedef enum logic [2:0] {S_IDLE, S_FPU, S_MREQ, S_MWAIT, S_RESP} state_e;
  state_e state;

  // instruction fields
  logic [6:0] opc, f7;
  logic [4:0] f_rs2, f_rs1, f_rd, f_rs3;
  logic       xd, xs1, xs2;
  always_comb begin
    opc   = cmd_inst[6:0];
    f7    = cmd_inst[31:25];
    f_rs2 = cmd_inst[24:20];
    f_rs1 = cmd_inst[19:15];
    xd    = cmd_inst[14];
    xs1   = cmd_inst[13];
    xs2   = cmd_inst[12];
    f_rd  = cmd_inst[11:7];
    f_rs3 = cmd_inst[31:27];
  end

  // register file
  logic [4:0]  ra1, ra2, ra3, wa;
  logic [31:0] pr1, pr2, pr3, wd;
  logic        we;
  posit_regfile #(.NREGS(NREGS)) u_rf (
    .clk(clk), .rst_n(rst_n), .ra1(ra1), .ra2(ra2), .ra3(ra3),
    .rd1(pr1), .rd2(pr2), .rd3(pr3), .we(we), .wa(wa), .wd(wd));

  logic is_cvt_es;
  assign is_cvt_es = (opc == OPC_CUSTOM0) && (f7 == F7_FCVT_ES);
  always_comb begin
    ra1 = is_cvt_es ? f_rd : f_rs1;
    ra2 = f_rs2;
    ra3 = f_rs3;
  end

  // CSR
  logic [4:0] es_mode;
  logic       fpu_out_valid, fpu_rd_is_int;
  logic [31:0] fpu_rd;
  logic [4:0]  fpu_fflags;
  logic        fpu_take;
  pcsr #(.ES_RESET(ES_RESET)) u_csr (
    .clk(clk), .rst_n(rst_n), .csr_en(csr_en), .csr_addr(csr_addr), .csr_op(csr_op),
    .csr_wdata(csr_wdata), .csr_rdata(csr_rdata),
    .flag_valid(fpu_take), .flags(fpu_fflags), .es_mode(es_mode));

  // FPU command translation
  logic        fpu_start_valid, fpu_start_ready;
  logic [31:0] fpu_a, fpu_b, fpu_c;
  logic [3:0]  fpu_opcode;
  logic [6:0]  fpu_f7;
  logic [2:0]  fpu_f3;
  logic [1:0]  fpu_imm;
  logic        is_fp;
  always_comb begin
    is_fp      = (opc == OPC_CUSTOM0) || (opc == OPC_CUSTOM1);
    fpu_a      = (is_fp && xs1 && !is_cvt_es) ? cmd_rs1 : pr1;
    fpu_b      = (is_fp && xs2) ? cmd_rs2 : pr2;
    fpu_c      = pr3;
    fpu_imm    = {1'b0, f_rs2[0]};
    if (opc == OPC_CUSTOM1) begin
      fpu_opcode = {2'b00, cmd_inst[26:25]};
      fpu_f7     = 7'b0;
      fpu_f3     = 3'b0;
    end else begin
      fpu_opcode = 4'b0100;
      fpu_f7     = {f7[6:2], 2'b00};
      fpu_f3     = (f7 == F7_FCVT_W || f7 == F7_FCVT_S_W) ? f_rs2[4:2] : {1'b0, f7[1:0]};
    end
    fpu_start_valid = (state == S_IDLE) && cmd_valid && is_fp;
  end

  posit_fpu u_fpu (
    .clk(clk), .rst_n(rst_n),
    .start_valid(fpu_start_valid), .start_ready(fpu_start_ready),
    .rs1(fpu_a), .rs2(fpu_b), .rs3(fpu_c),
    .opcode(fpu_opcode), .funct7(fpu_f7), .funct3(fpu_f3), .imm(fpu_imm),
    .es_mode(es_mode), .from_es(f_rs1), .to_es(f_rs2),
    .out_valid(fpu_out_valid), .out_ready(fpu_take),
    .rd(fpu_rd), .fflags(fpu_fflags), .rd_is_int(fpu_rd_is_int));

  // control FSM
  logic [4:0]  rd_q;
  logic        xd_q;
  logic [31:0] addr_d;
  always_comb begin
    addr_d = (opc == OPC_CUSTOM2) ? cmd_rs1 + {{20{cmd_inst[31]}}, cmd_inst[31:20]}
                                  : cmd_rs1 + {{20{cmd_inst[31]}}, cmd_inst[31:25], cmd_inst[11:7]};
  end

  assign cmd_ready = (state == S_IDLE) && (!is_fp || fpu_start_ready);
  assign fpu_take  = (state == S_FPU) && fpu_out_valid;
  assign busy      = (state != S_IDLE);
  assign mem_req_valid = (state == S_MREQ);

  always_comb begin
    we = 1'b0;
    wa = rd_q;
    wd = fpu_rd;
    if (fpu_take && !(xd_q || fpu_rd_is_int)) we = 1'b1;
    if (state == S_MWAIT && mem_resp_valid) begin
      we = 1'b1;
      wd = mem_resp_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      rd_q <= '0; xd_q <= 1'b0;
      resp_valid <= 1'b0; resp_rd <= '0; resp_data <= '0; resp_wen <= 1'b0;
      mem_req_addr <= '0; mem_req_we <= 1'b0; mem_req_wdata <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          rd_q <= f_rd;
          xd_q <= xd;
          if (is_fp) begin
            state <= S_FPU;
          end else if (opc == OPC_CUSTOM2 || opc == OPC_CUSTOM3) begin
            mem_req_addr  <= addr_d;
            mem_req_we    <= (opc == OPC_CUSTOM3);
            mem_req_wdata <= pr2;
            state         <= S_MREQ;
          end else begin
            resp_valid <= 1'b1;          // unknown opcode: empty response
            resp_rd    <= f_rd;
            resp_data  <= '0;
            resp_wen   <= 1'b0;
            state      <= S_RESP;
          end
        end
        S_FPU: if (fpu_out_valid) begin
          resp_valid <= 1'b1;
          resp_rd    <= rd_q;
          resp_data  <= fpu_rd;
          resp_wen   <= xd_q || fpu_rd_is_int;
          state      <= S_RESP;
        end
        S_MREQ: if (mem_req_ready) begin
          if (mem_req_we) begin
            resp_valid <= 1'b1;
            resp_rd    <= rd_q;
            resp_data  <= '0;
            resp_wen   <= 1'b0;
            state      <= S_RESP;
          end else begin
            state <= S_MWAIT;
          end
        end
        S_MWAIT: if (mem_resp_valid) begin
          resp_valid <= 1'b1;
          resp_rd    <= rd_q;
          resp_data  <= mem_resp_data;
          resp_wen   <= 1'b0;
          state      <= S_RESP;
        end
        S_RESP: if (resp_ready) begin
          resp_valid <= 1'b0;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
