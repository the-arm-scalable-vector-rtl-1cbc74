// Condition flags of a predicate-generating operation.
//
// SVE reuses the AArch64 NZCV flags with a predicate meaning (paper Table 1):
//   N = First : the first active element of the result is true
//   Z = None  : no active element of the result is true
//   C = !Last : the last active element of the result is not true
//   V = 0     (V carries scalarized-loop state only for ctermeq/ctermne,
//              which are handled in the count unit).
// "First" and "last" are taken in increasing element order and relative to
// the governing predicate `gov`, as the architecture defines them; with no
// governing element at all the flags are N=0 Z=1 C=1 V=0.  `gov` must
// already be masked to the element size and vector length.  Combinational.
module sve_pred_flags
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int PB = LEN_MAX * 16
) (
  input  logic [PB-1:0] gov,
  input  logic [PB-1:0] res,
  output nzcv_t         flags
);

  always_comb begin
    logic first_seen, first_v, last_v;
    first_seen = 1'b0;
    first_v    = 1'b0;
    last_v     = 1'b0;
    for (int b = 0; b < PB; b++) begin
      if (gov[b]) begin
        if (!first_seen) first_v = res[b];
        first_seen = 1'b1;
        last_v = res[b];
      end
    end
    flags.n = first_v;
    flags.z = ~|(gov & res);
    flags.c = ~last_v;
    flags.v = 1'b0;
  end

endmodule
