// pcsr: posit control and status register.
//
// Layout: bits 4:0 fflags, 7:5 rm, 12:8 es-mode, 31:13 reserved (read 0).
// Only the divide-by-zero flag (DZ, bit 3) exists; the other flag bits and
// rm always read 0 (rounding is fixed to nearest-even). es-mode chooses the
// es of every posit operation; it resets to ES_RESET and only accepts the
// supported values 2 and 3 (a write of another value leaves it unchanged).
// Three CSR views, as for the F extension: FFLAGS (0x001, bits 4:0),
// FRM (0x002, rm, read-only 0) and the whole register at PCSR (0x003).
// csr_op: 00 read, 01 write, 10 set bits, 11 clear bits; csr_rdata is the
// combinational old value. flag_valid ORs flags into fflags; a CSR write
// in the same cycle takes precedence. The field layout follows the original
// design; the addresses, WARL behaviour and reset value are this design's.
module pcsr
  import posit_pkg::*;
#(
  parameter logic [4:0] ES_RESET = 5'd2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_en,
  input  logic [11:0] csr_addr,
  input  logic [1:0]  csr_op,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  input  logic        flag_valid,
  input  logic [4:0]  flags,
  output logic [4:0]  es_mode
);

  localparam logic [11:0] A_FFLAGS = 12'h001;
  localparam logic [11:0] A_FRM    = 12'h002;
  localparam logic [11:0] A_PCSR   = 12'h003;
  localparam logic [4:0]  FLAG_MASK = 5'(1 << FFLAG_DZ);

  logic [4:0]  fflags;
  logic [4:0]  es_q;
  logic [31:0] full, old, nw;

  function automatic logic es_ok(input logic [4:0] v);
    return (v == 5'(ES_MIN)) || (v == 5'(ES_MAX));
  endfunction

  always_comb begin
    full = {19'b0, es_q, 3'b000, fflags};
    unique case (csr_addr)
      A_FFLAGS: old = {27'b0, fflags};
      A_FRM:    old = '0;
      A_PCSR:   old = full;
      default:  old = '0;
    endcase
    unique case (csr_op)
      2'b01:   nw = csr_wdata;
      2'b10:   nw = old | csr_wdata;
      2'b11:   nw = old & ~csr_wdata;
      default: nw = old;
    endcase
    csr_rdata = old;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fflags <= '0;
      es_q   <= ES_RESET;
    end else begin
      if (flag_valid) fflags <= fflags | (flags & FLAG_MASK);
      if (csr_en && csr_op != 2'b00) begin
        if (csr_addr == A_FFLAGS) fflags <= nw[4:0] & FLAG_MASK;
        if (csr_addr == A_PCSR) begin
          fflags <= nw[4:0] & FLAG_MASK;
          if (es_ok(nw[12:8])) es_q <= nw[12:8];
        end
      end
    end
  end

  assign es_mode = es_q;

  a_es_legal: assert property (@(posedge clk) disable iff (!rst_n) es_ok(es_q));

endmodule
