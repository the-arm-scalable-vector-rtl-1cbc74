// Vector-length control registers ZCR_EL1, ZCR_EL2 and ZCR_EL3.
//
// Each privilege level can reduce the vector length seen by itself and the
// levels below it.  Each register holds a 4-bit LEN field that encodes a
// requested length of (LEN+1) x 128 bits.  The length in force at exception
// level `cur_el` is the smallest of the implemented length LEN_MAX and the
// requests of ZCR_ELx for every x from max(cur_el,1) to 3.  The idea of
// reduction per level follows the paper; the (LEN+1) encoding, the rule that a
// register can be written only from its own level or a higher one, and the
// reset to the largest length are this design's choices.
//
// Interface: one write port (we, wel = 1..3, wlen), the current exception
// level, and eff_len in 128-bit units (1..LEN_MAX).  Writes take effect at
// the next rising clock edge; eff_len is combinational from the registers.
module sve_zcr #(
  parameter int LEN_MAX = 16     // implemented vector length, 128-bit units
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  logic [1:0] wel,        // which ZCR_ELx, 1..3
  input  logic [3:0] wlen,       // LEN field: length (wlen+1) x 128 bits
  input  logic [1:0] cur_el,     // exception level now executing, 0..3
  output logic [3:0] zcr_len [1:3],
  output logic       wr_denied,  // write from a lower level was ignored
  output logic [4:0] eff_len     // effective length, 128-bit units
);

  logic [3:0] len_q [1:3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= 3; i++) len_q[i] <= 4'hF;
    end else if (we && wel != 2'd0 && cur_el >= wel) begin
      len_q[wel] <= wlen;
    end
  end

  assign wr_denied = we && (wel == 2'd0 || cur_el < wel);
  assign zcr_len   = len_q;

  always_comb begin
    logic [4:0] l;
    l = 5'(LEN_MAX);
    for (int i = 1; i <= 3; i++) begin
      if (i >= int'(cur_el) && ({1'b0, len_q[i]} + 5'd1) < l)
        l = {1'b0, len_q[i]} + 5'd1;
    end
    eff_len = l;
  end

endmodule
