// Element mask of a predicate for one element size and vector length.
//
// Bit b of `mask` is set when predicate bit b is the enable bit of an
// element inside the current vector: b is a multiple of the element size in
// bytes (1 << esz) and b < eff_len x 16.  Predicate-producing operations AND
// their result with this mask, which clears the unused upper bits of each
// element and every bit beyond the vector length.  Combinational.
module sve_elem_mask
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int PB = LEN_MAX * 16
) (
  input  esz_e          esz,
  input  logic [4:0]    eff_len,
  output logic [PB-1:0] mask
);

  always_comb begin
    for (int b = 0; b < PB; b++) begin
      mask[b] = (b < int'(eff_len) * 16) &&
                ((b & ((1 << int'(esz)) - 1)) == 0);
    end
  end

endmodule
