// Scalable vector register file Z0-Z31.
//
// Each register is LEN_MAX x 128 bits wide.  The low 128 bits of Zn are the
// Advanced SIMD / FP register Vn: the SVE file overlays the existing SIMD
// file instead of adding a second one.  A write through the Advanced SIMD
// port (v_we) stores 128 bits and clears every bit above them, so no
// register is ever partly updated.  Both points follow the paper.
//
// Ports: three combinational read ports (zn, zm, zd, used for the two
// sources and the accumulator / store data), one full-width SVE write port,
// and an Advanced SIMD port pair: a 128-bit write port (written at the rising
// edge like the SVE port) and a 128-bit combinational read port (Vn).
// If both ports write the same register in one cycle the SVE port wins.
// Resetting all registers to zero is this design's choice (the architecture
// leaves the reset value unknown).
module sve_zregs
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int VB = LEN_MAX * 128
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [4:0]    ra [3],
  output logic [VB-1:0] rd [3],
  input  logic          we,
  input  logic [4:0]    wa,
  input  logic [VB-1:0] wd,
  input  logic          v_we,
  input  logic [4:0]    v_wa,
  input  logic [127:0]  v_wd,
  input  logic [4:0]    v_ra,
  output logic [127:0]  v_rd
);

  logic [VB-1:0] z_q [NUM_ZREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_ZREGS; i++) z_q[i] <= '0;
    end else begin
      if (v_we && !(we && wa == v_wa)) z_q[v_wa] <= VB'(v_wd);
      if (we) z_q[wa] <= wd;
    end
  end

  always_comb begin
    for (int p = 0; p < 3; p++) rd[p] = z_q[ra[p]];
  end
  assign v_rd = z_q[v_ra][127:0];

endmodule
