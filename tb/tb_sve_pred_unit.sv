// Self-checking test of the predicate-generating unit.  Each operation is
// tried with random operands, element sizes and vector lengths against an
// element-level reference model written here (element i of a predicate is
// bit i << esz).  Covers ptrue, pfalse, whilelt/whilelo (including counters
// next to the signed and unsigned limits), pnext, brka/brkb, predicate
// logic, rdffr, setffr and wrffr, and the flags each one sets.  The
// daxpy and strlen cases of the paper's examples are checked by name.
module tb_sve_pred_unit;
  import sve_pkg::*;
  localparam int LEN_MAX = 4;
  localparam int PB = LEN_MAX * 16;
  sve_op_e       op;
  esz_e          esz;
  logic          setflags, unpred;
  logic [4:0]    eff_len;
  logic [PB-1:0] pg_v, pn_v, pm_v, pd_v, ffr;
  logic [63:0]   xn, xm;
  logic          res_we, ffr_we, flags_we;
  logic [PB-1:0] res, ffr_wd;
  nzcv_t         flags;
  int checks = 0, failures = 0;

  sve_pred_unit #(.LEN_MAX(LEN_MAX)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nel();
    return (int'(eff_len) * 16) >> int'(esz);
  endfunction
  function automatic logic el(logic [PB-1:0] p, int i);
    return p[i << int'(esz)];
  endfunction

  // reference result and flags
  logic [PB-1:0] e_res, e_ffr;
  logic          e_res_we, e_ffr_we, e_flags_we;
  nzcv_t         e_flags;

  task automatic model();
    logic g [256], r [256], gv [256];
    int n = nel();
    int last, first_i, last_i;
    logic brk, found;
    e_res = '0; e_ffr = '0; e_res_we = 0; e_ffr_we = 0; e_flags_we = 0;
    for (int i = 0; i < n; i++) begin
      g[i] = unpred ? 1'b1 : el(pg_v, i);
      r[i] = 1'b0;
      gv[i] = g[i];
    end
    case (op)
      OP_PTRUE:  begin for (int i = 0; i < n; i++) begin r[i] = 1; gv[i] = 1; end
                       e_res_we = 1; e_flags_we = setflags; end
      OP_PFALSE: e_res_we = 1;
      OP_WHILELT, OP_WHILELO: begin
        // the sequential loop for (k = xn; k < xm; k++), one element per k
        longint sk;
        longint unsigned uk;
        sk = longint'(xn);
        uk = xn;
        for (int i = 0; i < n; i++) begin
          gv[i] = 1;
          if (op == OP_WHILELT) begin
            if (sk < longint'(xm)) begin r[i] = 1; sk++; end
            else break;
          end else begin
            if (uk < xm) begin r[i] = 1; uk++; end
            else break;
          end
        end
        for (int i = 0; i < n; i++) gv[i] = 1;
        e_res_we = 1; e_flags_we = 1;
      end
      OP_PNEXT: begin
        last = -1;
        for (int i = 0; i < n; i++) if (g[i] && el(pd_v, i)) last = i;
        found = 0;
        for (int i = last + 1; i < n; i++) if (g[i] && !found) begin r[i] = 1; found = 1; end
        e_res_we = 1; e_flags_we = 1;
      end
      OP_BRKA, OP_BRKB: begin
        brk = 0;
        for (int i = 0; i < n; i++) if (g[i]) begin
          if (op == OP_BRKB && el(pn_v, i)) brk = 1;
          r[i] = !brk;
          if (op == OP_BRKA && el(pn_v, i)) brk = 1;
        end
        e_res_we = 1; e_flags_we = setflags;
      end
      OP_PAND: begin for (int i = 0; i < n; i++) r[i] = g[i] & el(pn_v, i) & el(pm_v, i);
                     e_res_we = 1; e_flags_we = setflags; end
      OP_PORR: begin for (int i = 0; i < n; i++) r[i] = g[i] & (el(pn_v, i) | el(pm_v, i));
                     e_res_we = 1; e_flags_we = setflags; end
      OP_PEOR: begin for (int i = 0; i < n; i++) r[i] = g[i] & (el(pn_v, i) ^ el(pm_v, i));
                     e_res_we = 1; e_flags_we = setflags; end
      OP_RDFFR: begin for (int i = 0; i < n; i++) r[i] = g[i] & el(ffr, i);
                      e_res_we = 1; e_flags_we = setflags; end
      OP_SETFFR: begin e_ffr_we = 1; for (int b = 0; b < int'(eff_len) * 16; b++) e_ffr[b] = 1; end
      OP_WRFFR:  begin e_ffr_we = 1; for (int b = 0; b < int'(eff_len) * 16; b++) e_ffr[b] = pn_v[b]; end
      default: ;
    endcase
    for (int i = 0; i < n; i++) e_res[i << int'(esz)] = r[i];
    first_i = -1; last_i = -1;
    for (int i = 0; i < n; i++) if (gv[i]) begin
      if (first_i < 0) first_i = i;
      last_i = i;
    end
    e_flags.n = first_i >= 0 && r[first_i];
    e_flags.z = 1;
    for (int i = 0; i < n; i++) if (gv[i] && r[i]) e_flags.z = 0;
    e_flags.c = !(last_i >= 0 && r[last_i]);
    e_flags.v = 0;
  endtask

  task automatic check(string what);
    #1;
    model();
    checks++;
    if (res_we !== e_res_we || ffr_we !== e_ffr_we || flags_we !== e_flags_we ||
        (e_res_we && res !== e_res) || (e_ffr_we && ffr_wd !== e_ffr) ||
        (e_flags_we && flags !== e_flags)) begin
      failures++;
      $display("FAIL %s op=%s esz=%0d len=%0d xn=%h xm=%h res=%h exp=%h flags=%b exp=%b",
               what, op.name(), esz, eff_len, xn, xm, res, e_res, flags, e_flags);
    end
  endtask

  function automatic logic [PB-1:0] rp();
    return {$urandom, $urandom};
  endfunction

  initial begin
    sve_op_e ops [13] = '{OP_PTRUE, OP_PFALSE, OP_WHILELT, OP_WHILELO, OP_PNEXT, OP_BRKA,
                          OP_BRKB, OP_PAND, OP_PORR, OP_PEOR, OP_RDFFR, OP_SETFFR, OP_WRFFR};
    setflags = 0; unpred = 0; pg_v = '0; pn_v = '0; pm_v = '0; pd_v = '0; ffr = '0;
    // daxpy, n = 3, 128-bit vector: whilelt p0.d, 0, 3 -> T T, first set
    op = OP_WHILELT; esz = ESZ_D; eff_len = 1; xn = 0; xm = 3;
    check("daxpy-whilelt-0");
    checks++;
    if (res[0] !== 1 || res[8] !== 1 || flags.n !== 1) failures++;
    // second iteration: i = 2 -> T F
    xn = 2;
    check("daxpy-whilelt-2");
    // third: i = 4 -> F F, b.first falls through
    xn = 4;
    check("daxpy-whilelt-4");
    checks++;
    if (flags.n !== 0 || res !== '0) failures++;
    // counter next to the signed limit must not wrap
    xn = 64'h7fff_ffff_ffff_fffe; xm = 64'h7fff_ffff_ffff_ffff; eff_len = 4; esz = ESZ_B;
    check("whilelt-limit");
    checks++;
    if (res !== PB'(1)) failures++;
    op = OP_WHILELO; xn = 64'hffff_ffff_ffff_fffd; xm = '1;
    check("whilelo-limit");
    // random
    for (int t = 0; t < 6000; t++) begin
      op       = ops[$urandom % 13];
      esz      = esz_e'($urandom % 4);
      eff_len  = 5'(1 + $urandom % LEN_MAX);
      setflags = $urandom % 2;
      unpred   = (op == OP_RDFFR) && ($urandom % 4 == 0);
      pg_v = rp(); pn_v = rp() & rp() & rp(); pm_v = rp(); pd_v = rp() & rp(); ffr = rp();
      if ($urandom % 2) begin xn = 64'($urandom % 80); xm = 64'($urandom % 80); end
      else begin xn = {$urandom, $urandom}; xm = xn + 64'($urandom % 70) - 64'd10; end
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
