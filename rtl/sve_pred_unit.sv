// Predicate-generating unit.
//
// Computes, in one combinational pass, the new predicate (and the new FFR
// for setffr / wrffr) of the predicate instructions the paper uses for loop
// control and vector partitioning:
//   ptrue / pfalse          all elements true / false
//   whilelt / whilelo       element i true while xn + i < xm (signed /
//                           unsigned), compared without overflow so that a
//                           counter near the integer limit behaves as the
//                           sequential loop would
//   pnext pdn, pg, pdn      only the next element of pg after the last true
//                           element of the old pdn (serial sub-loops)
//   brka / brkb pd, pg/z, pn  true for the active elements before the first
//                           active true element of pn, that element included
//                           (brka) or excluded (brkb): the "before-break"
//                           partition; inactive elements are zero
//   and / orr / eor pd, pg/z  predicate logic under a governing predicate
//   rdffr pd, pg/z          FFR AND pg (pg = all true when unpred is set)
//   setffr / wrffr          FFR = all true / FFR = pn
// Every result is masked to the element size and the vector length.  The
// flags follow paper Table 1 (sve_pred_flags); while and pnext always set
// them, the others when `setflags` (the S forms) is given.  The set of
// operations and their meaning follow the paper's examples; the exact rules
// (for instance that brk only looks at active elements of pn) are those of
// the SVE architecture.
module sve_pred_unit
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int PB = LEN_MAX * 16
) (
  input  sve_op_e       op,
  input  esz_e          esz,
  input  logic          setflags,
  input  logic          unpred,
  input  logic [4:0]    eff_len,
  input  logic [PB-1:0] pg_v,
  input  logic [PB-1:0] pn_v,
  input  logic [PB-1:0] pm_v,
  input  logic [PB-1:0] pd_v,     // old destination (pnext)
  input  logic [PB-1:0] ffr,
  input  logic [63:0]   xn,
  input  logic [63:0]   xm,
  output logic          res_we,
  output logic [PB-1:0] res,
  output logic          ffr_we,
  output logic [PB-1:0] ffr_wd,
  output logic          flags_we,
  output nzcv_t         flags
);

  logic [PB-1:0] emask, g, gov;
  logic [PB-1:0] vlmask;

  sve_elem_mask #(.LEN_MAX(LEN_MAX)) u_mask (.esz(esz), .eff_len(eff_len), .mask(emask));

  always_comb begin
    for (int b = 0; b < PB; b++) vlmask[b] = (b < int'(eff_len) * 16);
  end

  assign g = (unpred ? '1 : pg_v) & emask;

  always_comb begin
    logic brk;
    int   last;
    logic found;
    logic signed [65:0] a, l;
    res      = '0;
    res_we   = 1'b0;
    ffr_we   = 1'b0;
    ffr_wd   = '0;
    flags_we = 1'b0;
    gov      = g;
    brk      = 1'b0;
    last     = -1;
    found    = 1'b0;
    a        = '0;
    l        = '0;
    unique case (op)
      OP_PTRUE: begin
        res = emask; res_we = 1'b1; gov = emask; flags_we = setflags;
      end
      OP_PFALSE: begin
        res = '0; res_we = 1'b1;
      end
      OP_WHILELT, OP_WHILELO: begin
        for (int b = 0; b < PB; b++) begin
          if (emask[b]) begin
            if (op == OP_WHILELT) begin
              a = 66'(signed'(xn)); l = 66'(signed'(xm));
            end else begin
              a = {2'b00, xn}; l = {2'b00, xm};
            end
            res[b] = (a + 66'(b >> int'(esz))) < l;
          end
        end
        res_we = 1'b1; gov = emask; flags_we = 1'b1;
      end
      OP_PNEXT: begin
        for (int b = 0; b < PB; b++) if (g[b] && pd_v[b]) last = b;
        for (int b = 0; b < PB; b++) begin
          if (g[b] && b > last && !found) begin
            res[b] = 1'b1;
            found  = 1'b1;
          end
        end
        res_we = 1'b1; flags_we = 1'b1;
      end
      OP_BRKA, OP_BRKB: begin
        for (int b = 0; b < PB; b++) begin
          if (g[b]) begin
            if (op == OP_BRKB && pn_v[b]) brk = 1'b1;
            res[b] = !brk;
            if (op == OP_BRKA && pn_v[b]) brk = 1'b1;
          end
        end
        res_we = 1'b1; flags_we = setflags;
      end
      OP_PAND: begin res = g & pn_v & pm_v;    res_we = 1'b1; flags_we = setflags; end
      OP_PORR: begin res = g & (pn_v | pm_v);  res_we = 1'b1; flags_we = setflags; end
      OP_PEOR: begin res = g & (pn_v ^ pm_v);  res_we = 1'b1; flags_we = setflags; end
      OP_RDFFR: begin
        res = ffr & g; res_we = 1'b1; flags_we = setflags;
      end
      OP_SETFFR: begin ffr_wd = vlmask;        ffr_we = 1'b1; end
      OP_WRFFR:  begin ffr_wd = pn_v & vlmask; ffr_we = 1'b1; end
      default: ;
    endcase
  end

  sve_pred_flags #(.LEN_MAX(LEN_MAX)) u_flags (.gov(gov), .res(res), .flags(flags));

endmodule
