// Predicate register file P0-P15 and the first-fault register FFR.
//
// Each predicate holds one bit per vector byte, LEN_MAX x 16 bits, so it can
// govern 8-, 16-, 32- and 64-bit elements alike: an element is enabled by the
// bit of its lowest byte.  FFR has the same shape; it is written by setffr /
// wrffr and by first-faulting loads, which can only clear its bits.
// The register count and layout follow the paper.  The restriction of
// data-processing and memory instructions to P0-P7 is applied where the
// governing predicate is selected (in the core), not here: this file gives
// all sixteen registers to every port.
//
// Ports: four combinational read ports, one write port, one FFR write port
// (ffr_we) and one FFR clear-mask port (ffr_clr_we: FFR &= ffr_clr_mask, used
// by first-faulting loads).  Writes happen at the rising edge; ffr_we wins
// over ffr_clr_we.  All bits reset to zero (this design's choice).
module sve_pregs
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int PB = LEN_MAX * 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [3:0]    ra [4],
  output logic [PB-1:0] rd [4],
  input  logic          we,
  input  logic [3:0]    wa,
  input  logic [PB-1:0] wd,
  output logic [PB-1:0] ffr,
  input  logic          ffr_we,
  input  logic [PB-1:0] ffr_wd,
  input  logic          ffr_clr_we,
  input  logic [PB-1:0] ffr_clr_mask
);

  logic [PB-1:0] p_q [NUM_PREGS];
  logic [PB-1:0] ffr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_PREGS; i++) p_q[i] <= '0;
      ffr_q <= '0;
    end else begin
      if (we) p_q[wa] <= wd;
      if (ffr_we)          ffr_q <= ffr_wd;
      else if (ffr_clr_we) ffr_q <= ffr_q & ffr_clr_mask;
    end
  end

  always_comb begin
    for (int p = 0; p < 4; p++) rd[p] = p_q[ra[p]];
  end
  assign ffr = ffr_q;

endmodule
