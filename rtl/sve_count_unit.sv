// Scalar-result unit: vector-length-aware counters and loop termination.
//
//   inc    xd = xn + (elements per vector) x imm    e.g. incd x4: i += VL/64
//   incp   xd = xn + number of true elements of pm  e.g. e += popcount(p2)
//   ctermeq / ctermne  compare xn with xm and set the scalarized-loop flags:
//          term true  -> N=1, V=0
//          term false -> N=0, V=!C (C is !last from the preceding pnext)
//          Z and C are kept.  b.tcont (N==V) then continues the serial
//          sub-loop only while neither the termination condition nor the
//          last element has been reached.
// Vector-length-implicit operands and the meaning of ctermeq / b.tcont
// (continue while !(term | last)) follow the paper; the exact flag values are
// those of the SVE architecture.  Combinational.
module sve_count_unit
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int PB = LEN_MAX * 16
) (
  input  sve_op_e       op,
  input  esz_e          esz,
  input  logic [4:0]    eff_len,
  input  logic [PB-1:0] pm_v,
  input  logic [63:0]   xn,
  input  logic [63:0]   xm,
  input  logic [63:0]   imm,
  input  nzcv_t         flags_in,
  output logic          xd_we,
  output logic [63:0]   xd,
  output logic          flags_we,
  output nzcv_t         flags
);

  logic [PB-1:0] emask;
  logic [63:0]   nelem, popc;
  logic          term;

  sve_elem_mask #(.LEN_MAX(LEN_MAX)) u_mask (.esz(esz), .eff_len(eff_len), .mask(emask));

  assign nelem = 64'({eff_len, 4'b0000} >> esz);   // (eff_len x 16 bytes) / element bytes

  always_comb begin
    popc = '0;
    for (int b = 0; b < PB; b++) popc = popc + 64'(pm_v[b] & emask[b]);
  end

  assign term = (op == OP_CTERMEQ) ? (xn == xm) : (xn != xm);

  always_comb begin
    xd_we    = 1'b0;
    xd       = '0;
    flags_we = 1'b0;
    flags    = flags_in;
    unique case (op)
      OP_INC:  begin xd_we = 1'b1; xd = xn + nelem * imm; end
      OP_INCP: begin xd_we = 1'b1; xd = xn + popc; end
      OP_CTERMEQ, OP_CTERMNE: begin
        flags_we = 1'b1;
        flags.n  = term;
        flags.v  = term ? 1'b0 : ~flags_in.c;
      end
      default: ;
    endcase
  end

endmodule
