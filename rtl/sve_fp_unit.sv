// Double-precision floating-point unit of the SVE execution unit.
//
//   fmla zda.d, pg/m, zn.d, zm.d   every active 64-bit element becomes
//                  round(zn x zm + zda) (fused, one sve_fma64 per element,
//                  combinational, written by the core like any one-cycle
//                  operation); inactive elements keep zda, elements beyond
//                  the vector length become zero
//   fadda dd, pg, dd, zm.d         strictly ordered add reduction: the scalar
//                  acc = xn is updated with acc = acc + zm[k] for every
//                  active element k in increasing element order, one element
//                  per clock cycle through a single fused adder (a + b
//                  computed as b x 1.0 + a, which rounds once), so the result
//                  is bit-identical to the sequential loop at every vector
//                  length
// Only 64-bit elements are built, the element size of the paper's examples.
// fadda handshake: `start` for one cycle when `busy` is low; `done` pulses
// with xd eff_len x 2 + 1 clock edges after the edge that accepts start (one
// per 64-bit element slot, one to finish); fmla is combinational.
// The paper names fmla and fadda and gives fadda's ordering; lane structure,
// the sequential one-adder fadda and this handshake are this design's own.
module sve_fp_unit
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int VB = LEN_MAX * 128,
  localparam int PB = LEN_MAX * 16,
  localparam int NE = LEN_MAX * 2           // 64-bit elements
) (
  input  logic          clk,
  input  logic          rst_n,
  input  sve_op_e       op,
  input  logic [4:0]    eff_len,
  input  logic [PB-1:0] pg_v,
  input  logic [VB-1:0] zd_v,
  input  logic [VB-1:0] zn_v,
  input  logic [VB-1:0] zm_v,
  input  logic [63:0]   xn,
  output logic          z_we,
  output logic [VB-1:0] zres,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [63:0]   xd
);

  localparam logic [63:0] ONE = 64'h3ff0_0000_0000_0000;

  // ------------------------------------------------------------------ fmla
  for (genvar k = 0; k < NE; k++) begin : g_lane
    logic [63:0] f;
    logic        act, in_vl;
    sve_fma64 u_fma (.a(zn_v[k*64 +: 64]), .b(zm_v[k*64 +: 64]), .c(zd_v[k*64 +: 64]), .r(f));
    assign act   = pg_v[k*8];
    assign in_vl = (k * 8) < int'(eff_len) * 16;
    assign zres[k*64 +: 64] = !in_vl ? 64'd0 : (act ? f : zd_v[k*64 +: 64]);
  end
  assign z_we = (op == OP_FMLA);

  // ----------------------------------------------------------------- fadda
  typedef enum logic [1:0] {F_IDLE, F_RUN, F_DONE} fstate_e;
  fstate_e       st_q;
  logic [63:0]   acc_q, sum;
  logic [VB-1:0] zm_q;
  logic [PB-1:0] pg_q;
  logic [5:0]    k_q, n_q;
  logic [63:0]   elem;

  assign elem = zm_q[63:0];
  sve_fma64 u_add (.a(elem), .b(ONE), .c(acc_q), .r(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= F_IDLE; acc_q <= '0; zm_q <= '0; pg_q <= '0; k_q <= '0; n_q <= '0;
    end else begin
      unique case (st_q)
        F_IDLE: if (start) begin
          acc_q <= xn; zm_q <= zm_v; pg_q <= pg_v; k_q <= '0;
          n_q   <= 6'({eff_len, 1'b0});
          st_q  <= F_RUN;
        end
        F_RUN: begin
          if (k_q == n_q) st_q <= F_DONE;
          else begin
            if (pg_q[0]) acc_q <= sum;
            zm_q <= zm_q >> 64;
            pg_q <= pg_q >> 8;
            k_q  <= k_q + 6'd1;
          end
        end
        default: st_q <= F_IDLE;
      endcase
    end
  end

  assign busy = (st_q != F_IDLE);
  assign done = (st_q == F_DONE);
  assign xd   = acc_q;

endmodule
