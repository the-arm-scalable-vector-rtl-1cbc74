// SVE execution unit: the architectural state of the Scalable Vector
// Extension and the units that execute its vector-length-agnostic
// instructions.
//
// State: Z0-Z31 (LEN_MAX x 128 bits, low 128 bits shared with the Advanced
// SIMD registers V0-V31), P0-P15 and FFR (LEN_MAX x 16 bits), the NZCV flags,
// and ZCR_EL1..EL3, which set the vector length in force (eff_len, 128-bit
// units, at most LEN_MAX).  Every unit works on the first eff_len x 128 bits
// and writes zeros above them, so the same instruction stream runs
// unchanged at any vector length.
//
// The host core's front end decodes SVE instructions and hands them over as
// micro-operations (sve_uop_t) with their scalar operands already read;
// scalar results (inc, incp, reductions, fadda) come back on xd.  The instruction-
// class decoder of the encoding map is included for that front end
// (insn -> is_sve / a64_group / sve_group).  Data-processing and memory
// operations take their governing predicate from P0-P7 only (pg[3] is
// ignored for them), predicate operations from all of P0-P15, as the paper
// specifies.
//
// Timing: a uop is accepted when uop_valid && uop_ready.  A non-memory uop
// updates the state at the accepting clock edge and raises `done` (with xd /
// xd_valid) for one cycle after it; uop_ready stays high, so one such uop can
// be accepted per cycle.  A memory uop drops uop_ready until the load/store
// unit has performed its element accesses; `done` (and `trap` with
// fault_addr when an access traps) then pulses for one cycle, in the cycle
// after the state update.  fadda likewise holds uop_ready low while it adds
// one element per cycle.  The micro-operation format, the single-issue
// timing and the cracked memory port are this design's own choices.
// Lint's note that rst_n is used both synchronously and asynchronously comes
// from the load/store unit's assertions, which are disabled during reset.
module sve_core
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,            // implemented length: 16 x 128 = 2048 bits
  localparam int VB = LEN_MAX * 128,
  localparam int PB = LEN_MAX * 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // micro-operation stream
  input  logic          uop_valid,
  output logic          uop_ready,
  input  sve_uop_t      uop,
  output logic          done,
  output logic          xd_valid,
  output logic [63:0]   xd,
  output logic          trap,
  output logic [63:0]   fault_addr,
  output nzcv_t         nzcv,
  // vector-length control
  input  logic [1:0]    cur_el,
  input  logic          zcr_we,
  input  logic [1:0]    zcr_wel,
  input  logic [3:0]    zcr_wlen,
  output logic          zcr_wr_denied,
  output logic [4:0]    eff_len,
  output logic [3:0]    zcr_len [1:3],
  // Advanced SIMD view of the vector registers
  input  logic          v_we,
  input  logic [4:0]    v_wa,
  input  logic [127:0]  v_wd,
  input  logic [4:0]    v_ra,
  output logic [127:0]  v_rd,
  // instruction-class decode for the front end
  input  logic [31:0]   insn,
  output logic          insn_is_sve,
  output logic [3:0]    insn_a64_group,
  output logic [3:0]    insn_sve_group,
  // element memory port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output mem_req_t      mem_req,
  input  logic          mem_rsp_valid,
  input  mem_rsp_t      mem_rsp
);

  logic          accept, accept_alu, accept_mem, accept_seq;
  logic          is_pred_op;
  logic [3:0]    pg_idx;

  logic [4:0]    z_ra [3];
  logic [VB-1:0] z_rd [3];
  logic          z_we;
  logic [4:0]    z_wa;
  logic [VB-1:0] z_wd;

  logic [3:0]    p_ra [4];
  logic [PB-1:0] p_rd [4];
  logic          p_we;
  logic [PB-1:0] p_wd;
  logic [PB-1:0] ffr;

  logic [PB-1:0] emask;
  nzcv_t         nzcv_q;

  // unit outputs
  logic          pu_res_we, pu_ffr_we, pu_flags_we;
  logic [PB-1:0] pu_res, pu_ffr_wd;
  nzcv_t         pu_flags;
  logic          cu_xd_we, cu_flags_we;
  logic [63:0]   cu_xd;
  nzcv_t         cu_flags;
  logic          va_z_we, va_p_we;
  logic [VB-1:0] va_zres;
  logic [PB-1:0] va_pres;
  nzcv_t         va_flags;
  logic          rd_xd_we;
  logic [63:0]   rd_xd;
  logic          ls_busy, ls_done, ls_z_we, ls_ffr_clr_we, ls_trap;
  logic [VB-1:0] ls_zres;
  logic [PB-1:0] ls_ffr_mask;
  logic [63:0]   ls_fault_addr;
  logic [4:0]    ls_zd_q;
  logic          fp_z_we, fp_busy, fp_done;
  logic [VB-1:0] fp_zres;
  logic [63:0]   fp_xd;

  logic          done_q, xd_valid_q, trap_q;
  logic [63:0]   xd_q;

  if (LEN_MAX < 1 || LEN_MAX > ARCH_LEN_MAX) begin : g_bad_len
    $error("LEN_MAX must be 1..16 (128..2048 bits)");
  end

  // ---------------------------------------------------------------- control
  assign uop_ready  = !ls_busy && !fp_busy;
  assign accept     = uop_valid && uop_ready;
  assign accept_mem = accept && is_mem_op(uop.op);
  assign accept_seq = accept && (uop.op == OP_FADDA);
  assign accept_alu = accept && !is_mem_op(uop.op) && (uop.op != OP_FADDA);

  assign is_pred_op = uop.op inside {OP_PTRUE, OP_PFALSE, OP_WHILELT, OP_WHILELO,
                                     OP_PNEXT, OP_BRKA, OP_BRKB, OP_PAND, OP_PORR,
                                     OP_PEOR, OP_RDFFR, OP_SETFFR, OP_WRFFR};
  // P0-P7 only for data-processing and memory operations
  assign pg_idx = is_pred_op ? uop.pg : {1'b0, uop.pg[2:0]};

  // ------------------------------------------------------------------ state
  sve_zcr #(.LEN_MAX(LEN_MAX)) u_zcr (
    .clk, .rst_n, .we(zcr_we), .wel(zcr_wel), .wlen(zcr_wlen), .cur_el,
    .zcr_len, .wr_denied(zcr_wr_denied), .eff_len);

  assign z_ra[0] = uop.zn;
  assign z_ra[1] = uop.zm;
  assign z_ra[2] = uop.zd;

  sve_zregs #(.LEN_MAX(LEN_MAX)) u_zregs (
    .clk, .rst_n, .ra(z_ra), .rd(z_rd), .we(z_we), .wa(z_wa), .wd(z_wd),
    .v_we, .v_wa, .v_wd, .v_ra, .v_rd);

  assign p_ra[0] = pg_idx;
  assign p_ra[1] = uop.pn;
  assign p_ra[2] = uop.pm;
  assign p_ra[3] = uop.pd;

  sve_pregs #(.LEN_MAX(LEN_MAX)) u_pregs (
    .clk, .rst_n, .ra(p_ra), .rd(p_rd), .we(p_we), .wa(uop.pd), .wd(p_wd),
    .ffr, .ffr_we(accept_alu && pu_ffr_we), .ffr_wd(pu_ffr_wd),
    .ffr_clr_we(ls_ffr_clr_we), .ffr_clr_mask(ls_ffr_mask));

  sve_elem_mask #(.LEN_MAX(LEN_MAX)) u_mask (.esz(uop.esz), .eff_len, .mask(emask));

  // ------------------------------------------------------------------ units
  sve_pred_unit #(.LEN_MAX(LEN_MAX)) u_pred (
    .op(uop.op), .esz(uop.esz), .setflags(uop.setflags), .unpred(uop.unpred),
    .eff_len, .pg_v(p_rd[0]), .pn_v(p_rd[1]), .pm_v(p_rd[2]), .pd_v(p_rd[3]),
    .ffr, .xn(uop.xn), .xm(uop.xm),
    .res_we(pu_res_we), .res(pu_res), .ffr_we(pu_ffr_we), .ffr_wd(pu_ffr_wd),
    .flags_we(pu_flags_we), .flags(pu_flags));

  sve_count_unit #(.LEN_MAX(LEN_MAX)) u_count (
    .op(uop.op), .esz(uop.esz), .eff_len, .pm_v(p_rd[2]),
    .xn(uop.xn), .xm(uop.xm), .imm(uop.imm), .flags_in(nzcv_q),
    .xd_we(cu_xd_we), .xd(cu_xd), .flags_we(cu_flags_we), .flags(cu_flags));

  sve_valu #(.LEN_MAX(LEN_MAX)) u_valu (
    .op(uop.op), .esz(uop.esz), .zeroing(uop.zeroing), .unpred(uop.unpred),
    .use_imm(uop.use_imm), .eff_len, .pg_v(p_rd[0]),
    .zd_v(z_rd[2]), .zn_v(z_rd[0]), .zm_v(z_rd[1]),
    .xn(uop.xn), .xm(uop.xm), .imm(uop.imm),
    .z_we(va_z_we), .zres(va_zres), .p_we(va_p_we), .pres(va_pres), .flags(va_flags));

  sve_reduce #(.LEN_MAX(LEN_MAX)) u_reduce (
    .op(uop.op), .esz(uop.esz), .eff_len, .pg_v(p_rd[0]), .zn_v(z_rd[0]),
    .xd_we(rd_xd_we), .xd(rd_xd));

  sve_lsu #(.LEN_MAX(LEN_MAX)) u_lsu (
    .clk, .rst_n, .start(accept_mem), .op(uop.op), .esz(uop.esz), .eff_len,
    .pg_v(p_rd[0] & emask), .zn_v(z_rd[0]), .zd_v(z_rd[2]),
    .xn(uop.xn), .xm(uop.xm), .imm(uop.imm),
    .busy(ls_busy), .done(ls_done), .z_we(ls_z_we), .zres(ls_zres),
    .ffr_clr_we(ls_ffr_clr_we), .ffr_clr_mask(ls_ffr_mask),
    .trap(ls_trap), .fault_addr(ls_fault_addr),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp);

  sve_fp_unit #(.LEN_MAX(LEN_MAX)) u_fp (
    .clk, .rst_n, .op(uop.op), .eff_len, .pg_v(p_rd[0] & emask),
    .zd_v(z_rd[2]), .zn_v(z_rd[0]), .zm_v(z_rd[1]), .xn(uop.xn),
    .z_we(fp_z_we), .zres(fp_zres), .start(accept_seq), .busy(fp_busy), .done(fp_done),
    .xd(fp_xd));

  sve_insn_class u_class (
    .insn, .is_sve(insn_is_sve), .a64_group(insn_a64_group), .sve_group(insn_sve_group));

  // ----------------------------------------------------------- write-back
  always_comb begin
    z_we = 1'b0;
    z_wa = uop.zd;
    z_wd = va_zres;
    if (ls_z_we) begin
      z_we = 1'b1;
      z_wa = ls_zd_q;
      z_wd = ls_zres;
    end else if (accept_alu && va_z_we) begin
      z_we = 1'b1;
    end else if (accept_alu && fp_z_we) begin
      z_we = 1'b1;
      z_wd = fp_zres;
    end
  end

  assign p_we = accept_alu && (pu_res_we || va_p_we);
  assign p_wd = va_p_we ? va_pres : pu_res;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nzcv_q     <= '0;
      ls_zd_q    <= '0;
      done_q     <= 1'b0;
      xd_valid_q <= 1'b0;
      xd_q       <= '0;
      trap_q     <= 1'b0;
    end else begin
      if (accept_mem) ls_zd_q <= uop.zd;
      if (accept_alu) begin
        if (pu_flags_we)      nzcv_q <= pu_flags;
        else if (va_p_we)     nzcv_q <= va_flags;
        else if (cu_flags_we) nzcv_q <= cu_flags;
      end
      done_q     <= accept_alu || ls_done || fp_done;
      xd_valid_q <= (accept_alu && (cu_xd_we || rd_xd_we)) || fp_done;
      if (fp_done) xd_q <= fp_xd;
      else if (accept_alu && (cu_xd_we || rd_xd_we)) xd_q <= cu_xd_we ? cu_xd : rd_xd;
      trap_q     <= ls_trap;
    end
  end

  assign done       = done_q;
  assign xd_valid   = xd_valid_q;
  assign xd         = xd_q;
  assign trap       = trap_q;
  assign fault_addr = ls_fault_addr;
  assign nzcv       = nzcv_q;

endmodule
