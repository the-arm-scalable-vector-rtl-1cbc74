// Vector load/store unit with first-fault support.
//
// Every vector memory instruction is cracked into one memory access per
// active element, issued in increasing element order over a single
// element-wide memory port; inactive elements are skipped at one cycle each.
// Cracking is the conservative scheme the paper assumes for gathers and
// scatters; using it for contiguous accesses too is this design's choice.
//   ld1 / st1           contiguous: address = xn + (xm << esz) + (k << esz)
//   ld1r                one access at xn + imm, broadcast to all active
//                       elements (load-and-broadcast)
//   ld1 / st1 gather / scatter  address = element k of zn (64-bit for .d,
//                       zero-extended 32-bit for .s) + imm
//   ldff1 (contiguous or gather)  first-faulting: a fault on the first active
//                       element traps; a fault on a later element does not
//                       trap but ends the access there, clears FFR from that
//                       element upward and leaves the elements from there on
//                       zero (paper Fig. 4 and Sec. 2.3.3).
// A fault on any active element of a normal load or store traps; stores
// already made before the fault stay made.  Loads are zeroing (p/z).
//
// Handshake: `start` with the operands for one cycle while `busy` is low;
// `done` pulses one cycle when the operation ends, with z_we/zres (load
// result), ffr_clr_we/ffr_clr_mask (FFR &= mask) and trap/fault_addr.
// Memory port: a request is held while mem_req_valid && !mem_req_ready; one
// request is outstanding at a time and its response (mem_rsp_valid) must
// come at least one cycle after the request was accepted.  Concurrent
// assertions check these port rules; they are disabled during reset, which
// is why lint sees rst_n used both as the asynchronous reset and in logic.
module sve_lsu
  import sve_pkg::*;
#(
  parameter int LEN_MAX = 16,
  localparam int VB = LEN_MAX * 128,
  localparam int PB = LEN_MAX * 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  sve_op_e       op,
  input  esz_e          esz,
  input  logic [4:0]    eff_len,
  input  logic [PB-1:0] pg_v,
  input  logic [VB-1:0] zn_v,       // gather / scatter addresses
  input  logic [VB-1:0] zd_v,       // store data
  input  logic [63:0]   xn,
  input  logic [63:0]   xm,
  input  logic [63:0]   imm,
  output logic          busy,
  output logic          done,
  output logic          z_we,
  output logic [VB-1:0] zres,
  output logic          ffr_clr_we,
  output logic [PB-1:0] ffr_clr_mask,
  output logic          trap,
  output logic [63:0]   fault_addr,
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output mem_req_t      mem_req,
  input  logic          mem_rsp_valid,
  input  mem_rsp_t      mem_rsp
);

  typedef enum logic [1:0] {S_IDLE, S_STEP, S_WAIT, S_DONE} state_e;

  state_e        st_q;
  sve_op_e       op_q;
  esz_e          esz_q;
  logic [PB-1:0] pg_q;
  logic [VB-1:0] zn_q, zd_q, res_q;
  logic [63:0]   xn_q, xm_q, imm_q;
  logic [8:0]    k_q, nelem_q;            // element counter, up to 256
  logic          seen_q;                  // an earlier active element was accessed
  logic          z_we_q, ffr_clr_q, trap_q;
  logic [PB-1:0] ffr_mask_q;
  logic [63:0]   fault_addr_q;
  logic [PB-1:0] vlmask;

  logic          is_ld, is_ff, is_r, is_gs;
  logic          act_k;
  logic [63:0]   addr_k, elem_zn, wdata_k, rdata_x;
  int            eb;

  assign is_ld = op_q inside {OP_LD1, OP_LDFF1, OP_LD1R, OP_LD1_GATHER, OP_LDFF1_GATHER};
  assign is_ff = op_q inside {OP_LDFF1, OP_LDFF1_GATHER};
  assign is_r  = (op_q == OP_LD1R);
  assign is_gs = op_q inside {OP_LD1_GATHER, OP_LDFF1_GATHER, OP_ST1_SCATTER};
  assign eb    = 1 << int'(esz_q);

  always_comb begin
    int b;
    b       = int'(k_q) * eb;
    act_k   = (b < PB) ? pg_q[b] : 1'b0;
    elem_zn = '0;
    wdata_k = '0;
    for (int i = 0; i < 64; i++) begin
      if (i < eb * 8 && b * 8 + i < VB) begin
        elem_zn[i] = zn_q[b*8 + i];
        wdata_k[i] = zd_q[b*8 + i];
      end
    end
    if (is_r)       addr_k = xn_q + imm_q;
    else if (is_gs) addr_k = elem_zn + imm_q;
    else            addr_k = xn_q + ((xm_q + 64'(k_q)) << esz_q);
    rdata_x = '0;
    for (int i = 0; i < 64; i++) if (i < eb * 8) rdata_x[i] = mem_rsp.rdata[i];
  end

  assign mem_req_valid = (st_q == S_STEP) && act_k && (k_q < nelem_q);
  assign mem_req.addr  = addr_k;
  assign mem_req.we    = !is_ld;
  assign mem_req.size  = esz_q;
  assign mem_req.wdata = wdata_k;

  assign busy = (st_q != S_IDLE);

  always_comb begin
    for (int b = 0; b < PB; b++) vlmask[b] = (b < int'(eff_len) * 16);
  end

  // bits of every element below element k (the FFR partition that stays)
  function automatic logic [PB-1:0] below_mask(logic [8:0] k, int ebytes);
    logic [PB-1:0] m;
    for (int b = 0; b < PB; b++) m[b] = (b < int'(k) * ebytes);
    return m;
  endfunction

  // write element value v into every active element (ld1r) or element k
  function automatic logic [VB-1:0] put_elem(logic [VB-1:0] r, logic [8:0] k,
                                             esz_e sz, logic [63:0] v,
                                             logic bcast, logic [PB-1:0] pg);
    logic [VB-1:0] o;
    o = r;
    unique case (sz)
      ESZ_B: for (int e = 0; e < VB / 8; e++)
               if (bcast ? pg[e] : (e == int'(k))) o[e*8 +: 8] = v[7:0];
      ESZ_H: for (int e = 0; e < VB / 16; e++)
               if (bcast ? pg[e*2] : (e == int'(k))) o[e*16 +: 16] = v[15:0];
      ESZ_S: for (int e = 0; e < VB / 32; e++)
               if (bcast ? pg[e*4] : (e == int'(k))) o[e*32 +: 32] = v[31:0];
      default: for (int e = 0; e < VB / 64; e++)
               if (bcast ? pg[e*8] : (e == int'(k))) o[e*64 +: 64] = v;
    endcase
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= S_IDLE;
      op_q         <= OP_NOP;
      esz_q        <= ESZ_B;
      pg_q         <= '0;
      zn_q         <= '0;
      zd_q         <= '0;
      res_q        <= '0;
      xn_q         <= '0;
      xm_q         <= '0;
      imm_q        <= '0;
      k_q          <= '0;
      nelem_q      <= '0;
      seen_q       <= 1'b0;
      z_we_q       <= 1'b0;
      ffr_clr_q    <= 1'b0;
      trap_q       <= 1'b0;
      ffr_mask_q   <= '0;
      fault_addr_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (start) begin
          op_q       <= op;
          esz_q      <= esz;
          pg_q       <= pg_v & vlmask;
          zn_q       <= zn_v;
          zd_q       <= zd_v;
          xn_q       <= xn;
          xm_q       <= xm;
          imm_q      <= imm;
          res_q      <= '0;
          k_q        <= '0;
          nelem_q    <= 9'({eff_len, 4'b0000} >> esz);
          seen_q     <= 1'b0;
          z_we_q     <= 1'b0;
          ffr_clr_q  <= 1'b0;
          trap_q     <= 1'b0;
          ffr_mask_q <= '1;
          st_q       <= S_STEP;
        end
        S_STEP: begin
          if (k_q >= nelem_q) begin
            z_we_q <= is_ld;
            st_q   <= S_DONE;
          end else if (!act_k) begin
            k_q <= k_q + 9'd1;
          end else if (mem_req_ready) begin
            st_q <= S_WAIT;
          end
        end
        S_WAIT: if (mem_rsp_valid) begin
          if (mem_rsp.fault) begin
            if (is_ff && seen_q) begin
              // not the first active element: suppress, shrink FFR
              ffr_clr_q  <= 1'b1;
              ffr_mask_q <= below_mask(k_q, eb);
              z_we_q     <= 1'b1;
            end else begin
              trap_q       <= 1'b1;
              fault_addr_q <= addr_k;
            end
            st_q <= S_DONE;
          end else begin
            res_q  <= put_elem(res_q, k_q, esz_q, rdata_x, is_r, pg_q);
            seen_q <= 1'b1;
            if (is_r) begin
              z_we_q <= 1'b1;
              st_q   <= S_DONE;
            end else begin
              k_q  <= k_q + 9'd1;
              st_q <= S_STEP;
            end
          end
        end
        S_DONE: st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign done         = (st_q == S_DONE);
  assign z_we         = done && z_we_q && !trap_q;
  assign zres         = res_q;
  assign ffr_clr_we   = done && ffr_clr_q;
  assign ffr_clr_mask = ffr_mask_q;
  assign trap         = done && trap_q;
  assign fault_addr   = fault_addr_q;

  // memory-port rules
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> st_q == S_WAIT);
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
