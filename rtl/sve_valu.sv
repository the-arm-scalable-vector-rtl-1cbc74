// Predicated vector integer datapath.
//
// Holds one lane per element for each of the four element sizes (8, 16, 32
// and 64 bits, LEN_MAX x 16, x 8, x 4 and x 2 lanes) and selects the set
// that matches `esz`.  It executes dup, cpy, index, movprfx, add, sub, mul,
// and, orr, eor, mla and the compares cmpeq / cmpne / cmplt / cmpge.
// Data-processing forms are destructive when predicated (zdn = zdn op zm
// under pg) and constructive when unpredicated (zd = zn op zm), as the paper
// describes.  movprfx is executed as a discrete vector copy (zeroing, merging
// or unpredicated), which the paper allows instead of fusing it with the next
// instruction.  A compare writes a predicate (p/z) and sets the flags of
// paper Table 1 with pg as governing predicate.
//
// Combinational: results are written by the core at the next rising edge.
// Integer operations only: floating point (fmla, fadda) is not in this unit.
module sve_valu
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int VB = LEN_MAX * 128,
  localparam int PB = LEN_MAX * 16
) (
  input  sve_op_e       op,
  input  esz_e          esz,
  input  logic          zeroing,
  input  logic          unpred,
  input  logic          use_imm,
  input  logic [4:0]    eff_len,
  input  logic [PB-1:0] pg_v,
  input  logic [VB-1:0] zd_v,
  input  logic [VB-1:0] zn_v,
  input  logic [VB-1:0] zm_v,
  input  logic [63:0]   xn,
  input  logic [63:0]   xm,
  input  logic [63:0]   imm,
  output logic          z_we,
  output logic [VB-1:0] zres,
  output logic          p_we,
  output logic [PB-1:0] pres,
  output nzcv_t         flags
);

  logic [VB-1:0] zres_g [4];
  logic [PB-1:0] pres_g [4];
  logic [PB-1:0] emask;

  for (genvar g = 0; g < 4; g++) begin : g_size
    localparam int W  = 8 << g;
    localparam int N  = VB / W;
    localparam int EB = W / 8;
    for (genvar k = 0; k < N; k++) begin : g_lane
      logic cmp;
      sve_valu_lane #(.W(W)) u_lane (
        .op(op), .zeroing(zeroing), .unpred(unpred), .use_imm(use_imm),
        .act(pg_v[k*EB]), .in_vl(k*EB < int'(eff_len) * 16),
        .zd_e(zd_v[k*W +: W]), .zn_e(zn_v[k*W +: W]), .zm_e(zm_v[k*W +: W]),
        .xn_e(xn[W-1:0]), .xm_e(xm[W-1:0]), .imm_e(imm[W-1:0]),
        .idx_e(W'(k)),
        .res(zres_g[g][k*W +: W]), .cmp(cmp));
      for (genvar j = 0; j < EB; j++) begin : g_pbit
        if (j == 0) begin : g_en
          assign pres_g[g][k*EB] = cmp;
        end else begin : g_zero
          assign pres_g[g][k*EB+j] = 1'b0;
        end
      end
    end
  end

  sve_elem_mask #(.LEN_MAX(LEN_MAX)) u_mask (.esz(esz), .eff_len(eff_len), .mask(emask));

  assign zres = zres_g[esz];
  assign pres = pres_g[esz];
  assign z_we = op inside {OP_DUP, OP_CPY, OP_INDEX, OP_MOVPRFX, OP_ADD, OP_SUB,
                           OP_MUL, OP_AND, OP_ORR, OP_EOR, OP_MLA};
  assign p_we = op inside {OP_CMPEQ, OP_CMPNE, OP_CMPLT, OP_CMPGE};

  sve_pred_flags #(.LEN_MAX(LEN_MAX)) u_flags (.gov(pg_v & emask), .res(pres), .flags(flags));

endmodule
