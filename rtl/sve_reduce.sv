// Horizontal reduction unit.
//
// Combines the active elements of one vector register into a scalar:
// eorv, orv, andv (result is one element, zero-extended to 64 bits) and
// uaddv (unsigned sum, 64 bits).  Inactive elements and elements beyond the
// vector length contribute the operation's identity.  Horizontal logical and
// integer reductions are named by the paper (eorv in its linked-list
// example); the floating-point reductions (including the strictly ordered
// fadda) are not in this unit.  The paper's performance model charges a
// latency proportional to the vector length for such cross-lane operations;
// here the reduction is a single combinational step and the core finishes it
// in one cycle like any other operation.
module sve_reduce
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int VB = LEN_MAX * 128,
  localparam int PB = LEN_MAX * 16
) (
  input  sve_op_e       op,
  input  esz_e          esz,
  input  logic [4:0]    eff_len,
  input  logic [PB-1:0] pg_v,
  input  logic [VB-1:0] zn_v,
  output logic          xd_we,
  output logic [63:0]   xd
);

  logic [63:0] r_g [4];

  for (genvar g = 0; g < 4; g++) begin : g_size
    localparam int W  = 8 << g;
    localparam int N  = VB / W;
    localparam int EB = W / 8;
    always_comb begin
      logic [W-1:0] acc_l;
      logic [63:0]  sum;
      acc_l = (op == OP_ANDV) ? '1 : '0;
      sum   = '0;
      for (int k = 0; k < N; k++) begin
        if (pg_v[k*EB] && (k*EB < int'(eff_len) * 16)) begin
          unique case (op)
            OP_EORV: acc_l = acc_l ^ zn_v[k*W +: W];
            OP_ORV:  acc_l = acc_l | zn_v[k*W +: W];
            OP_ANDV: acc_l = acc_l & zn_v[k*W +: W];
            default: ;
          endcase
          sum = sum + 64'(zn_v[k*W +: W]);
        end
      end
      r_g[g] = (op == OP_UADDV) ? sum : 64'(acc_l);
    end
  end

  assign xd    = r_g[esz];
  assign xd_we = op inside {OP_EORV, OP_ORV, OP_ANDV, OP_UADDV};

endmodule
