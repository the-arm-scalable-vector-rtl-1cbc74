// Instruction-class decoder for the A64 encoding space with SVE.
//
// A 32-bit A64 instruction is first classified by bits 28:25 into its
// top-level group; SVE occupies the single group 0010, a 28-bit region.
// Inside that region bits {31,30,29,24} select the SVE sub-group (integer
// data processing, permutes, integer compares, predicate operations, FP,
// 32-/64-bit gathers, contiguous loads/stores, scatters).  Both maps are
// taken exactly as drawn in the paper's encoding-footprint figure; codes the
// figure leaves blank are reported as unallocated.  Only the class is
// decoded: the paper does not give the encodings below this level.
//
// Purely combinational: outputs follow `insn` in the same cycle.  Only bits
// 31:24 take part in the classification, so lint reports insn[23:0] unused;
// the full word is kept as the port because it is what a front end holds.
module sve_insn_class (
  input  logic [31:0] insn,
  output logic        is_sve,        // bits 28:25 == 0010
  output logic [3:0]  a64_group,     // a64_grp_e value
  output logic [3:0]  sve_group      // sve_grp_e value, SVE_NONE when !is_sve
);

  typedef enum logic [3:0] {
    A64_UNALLOC, A64_SVE, A64_INT_LS_PAIR_EX, A64_INT_DP_SHIFT,
    A64_ASIMD_LS, A64_ASIMD_DP, A64_INT_DP_IMM, A64_CONTROL_FLOW,
    A64_INT_LS, A64_INT_DP, A64_FP_LS, A64_FP_DP
  } a64_grp_e;

  typedef enum logic [3:0] {
    SVE_NONE, SVE_UNALLOC, SVE_INT_DP, SVE_PERM, SVE_INT_CMP, SVE_PRED,
    SVE_FP_DP_CMP, SVE_GATHER_LD32, SVE_CONTIG_LDST, SVE_GATHER_LD64,
    SVE_SCATTER_ST
  } sve_grp_e;

  a64_grp_e top_g;
  sve_grp_e sub_g;
  logic [3:0] top_f, sub_f;

  assign top_f = insn[28:25];
  assign sub_f = {insn[31:29], insn[24]};

  always_comb begin
    unique casez (top_f)
      4'b0000, 4'b0001, 4'b0011: top_g = A64_UNALLOC;
      4'b0010: top_g = A64_SVE;
      4'b0100: top_g = A64_INT_LS_PAIR_EX;
      4'b0101: top_g = A64_INT_DP_SHIFT;
      4'b0110: top_g = A64_ASIMD_LS;
      4'b0111: top_g = A64_ASIMD_DP;
      4'b100?: top_g = A64_INT_DP_IMM;
      4'b101?: top_g = A64_CONTROL_FLOW;
      4'b1100: top_g = A64_INT_LS;
      4'b1101: top_g = A64_INT_DP;
      4'b1110: top_g = A64_FP_LS;
      default: top_g = A64_FP_DP;     // 1111
    endcase
  end

  always_comb begin
    unique casez (sub_f)
      4'b0000: sub_g = SVE_INT_DP;
      4'b0001: sub_g = SVE_PERM;
      4'b0010: sub_g = SVE_INT_CMP;
      4'b0011: sub_g = SVE_PRED;
      4'b0100, 4'b0101, 4'b0110: sub_g = SVE_UNALLOC;
      4'b0111: sub_g = SVE_FP_DP_CMP;
      4'b100?: sub_g = SVE_GATHER_LD32;
      4'b101?: sub_g = SVE_CONTIG_LDST;
      4'b110?: sub_g = SVE_GATHER_LD64;
      default: sub_g = SVE_SCATTER_ST;  // 111x
    endcase
  end

  assign is_sve    = (top_g == A64_SVE);
  assign a64_group = top_g;
  assign sve_group = is_sve ? sub_g : SVE_NONE;

endmodule
