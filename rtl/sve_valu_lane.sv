// One W-bit element lane of the SVE vector datapath.
//
// Computes the element result of every vector data-processing operation for
// one element and applies predication: an active element (act) takes the
// result, an inactive one keeps the old destination element (merging, p/m)
// or becomes zero (zeroing, p/z); an element beyond the vector length
// (in_vl = 0) is always zero.  Unpredicated operations treat every element
// inside the vector as active.  The compare result `cmp` is the element's
// predicate bit, already gated by act and in_vl.  Combinational.
module sve_valu_lane
  import sve_pkg::*;
#(
  parameter int W = 64
) (
  input  sve_op_e      op,
  input  logic         zeroing,
  input  logic         unpred,
  input  logic         use_imm,
  input  logic         act,       // governing predicate bit of this element
  input  logic         in_vl,
  input  logic [W-1:0] zd_e,      // old destination / accumulator
  input  logic [W-1:0] zn_e,
  input  logic [W-1:0] zm_e,
  input  logic [W-1:0] xn_e,      // scalar operand, truncated
  input  logic [W-1:0] xm_e,
  input  logic [W-1:0] imm_e,
  input  logic [W-1:0] idx_e,     // element number
  output logic [W-1:0] res,
  output logic         cmp
);

  logic [W-1:0] a, b, r;
  logic         on, pred_op;

  // destructive predicated forms take the destination as first operand
  assign a = unpred ? zn_e : zd_e;
  assign b = use_imm ? imm_e : zm_e;

  always_comb begin
    r       = zd_e;
    pred_op = 1'b1;
    unique case (op)
      OP_DUP:     begin r = use_imm ? imm_e : xn_e; pred_op = 1'b0; end
      OP_INDEX:   begin r = xn_e + idx_e * (use_imm ? imm_e : xm_e); pred_op = 1'b0; end
      OP_CPY:     r = xn_e;
      OP_MOVPRFX: r = zn_e;
      OP_ADD:     r = a + b;
      OP_SUB:     r = a - b;
      OP_MUL:     r = a * b;
      OP_AND:     r = a & b;
      OP_ORR:     r = a | b;
      OP_EOR:     r = a ^ b;
      OP_MLA:     r = zd_e + zn_e * zm_e;
      default: ;
    endcase
  end

  assign on = in_vl && (act || unpred || !pred_op);

  always_comb begin
    if (!in_vl)        res = '0;
    else if (on)       res = r;
    else if (zeroing)  res = '0;
    else               res = zd_e;
  end

  always_comb begin
    unique case (op)
      OP_CMPEQ: cmp = (zn_e == b);
      OP_CMPNE: cmp = (zn_e != b);
      OP_CMPLT: cmp = signed'(zn_e) <  signed'(b);
      OP_CMPGE: cmp = signed'(zn_e) >= signed'(b);
      default:  cmp = 1'b0;
    endcase
    cmp = cmp && act && in_vl;
  end

endmodule
