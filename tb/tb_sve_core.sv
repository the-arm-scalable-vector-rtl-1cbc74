// End-to-end test of the SVE execution unit at its default size (2048-bit
// registers).  The test bench plays the host core: it keeps the scalar
// registers, executes the scalar instructions and branches of each program
// itself, and hands every SVE instruction to the unit as a micro-operation.
// A byte-addressed memory model with random stalls and latency, and with a
// faulting address range, serves the unit's element accesses.
//
// Programs (the paper's examples, run unchanged at several vector lengths
// selected through ZCR_EL1):
//   daxpy    y[i] = a*x[i] + y[i] in double precision with fmla; n = 3 with
//            a = 8, x = 4 5 6 7, y = 0 1 2 3 must give y = 32 41 50 3 after
//            19 instructions at 128 bits and 12 at 256 bits, counting ret;
//            larger n at 384, 512 and 2048 bits and non-integer data are
//            checked against a scalar reference (8*x + y rounds once here,
//            since 8*x is exact)
//   strlen   first-faulting byte loads, rdffr, cmpeq, brkbs, incp, b.last;
//            strings that end just before a faulting page (the fault is
//            suppressed) and one that runs into it (the load traps)
//   list     the linked-list XOR of the split-loop example: pfalse, pnext,
//            cpy, ctermeq / b.tcont, brka, gather, eor, eorv
// plus fadda (strictly ordered FP sum under a predicate built with index,
// and, cmpne), checks of the Advanced SIMD overlay (upper bits cleared), movprfx,
// the P0-P7 restriction of governing predicates, and denied ZCR writes.
// Each mechanism is counted and a mechanism that never happened fails.
module tb_sve_core;
  import sve_pkg::*;
  localparam int LEN_MAX = 16;
  localparam logic [63:0] BAD_LO = 64'h0010_0000, BAD_HI = 64'h0010_1000;

  logic        clk = 0, rst_n = 0;
  logic        uop_valid, uop_ready, done, xd_valid, trap;
  sve_uop_t    uop;
  logic [63:0] xd, fault_addr;
  nzcv_t       nzcv;
  logic [1:0]  cur_el, zcr_wel;
  logic        zcr_we, zcr_wr_denied;
  logic [3:0]  zcr_wlen;
  logic [4:0]  eff_len;
  logic [3:0]  zcr_len [1:3];
  logic        v_we;
  logic [4:0]  v_wa, v_ra;
  logic [127:0] v_wd, v_rd;
  logic [31:0] insn;
  logic        insn_is_sve;
  logic [3:0]  insn_a64_group, insn_sve_group;
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t    mem_req;
  mem_rsp_t    mem_rsp;

  sve_core dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_partial_while = 0, m_ff_suppress = 0, m_trap = 0, m_vl_switch = 0, m_zcr_denied = 0;
  int m_asimd_zero = 0, m_pnext = 0, m_cterm_stop = 0, m_brk = 0, m_gather = 0;
  int m_mem_stall = 0, m_movprfx = 0, m_reduce = 0, m_p8_restrict = 0, m_insn_class = 0, m_fadda = 0;

  initial begin
    #200000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ memory model
  logic [7:0] mem [longint];
  function automatic logic [7:0] mbyte(logic [63:0] a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction
  function automatic logic [63:0] mread(logic [63:0] a, int bytes);
    logic [63:0] v = '0;
    for (int i = 0; i < bytes; i++) v[i*8 +: 8] = mbyte(a + 64'(i));
    return v;
  endfunction
  task automatic mwrite(logic [63:0] a, int bytes, logic [63:0] v);
    for (int i = 0; i < bytes; i++) mem[a + 64'(i)] = v[i*8 +: 8];
  endtask
  function automatic bit is_bad(logic [63:0] a);
    return a >= BAD_LO && a < BAD_HI;
  endfunction

  logic     pend;
  int       lat;
  mem_req_t preq;
  task automatic respond(mem_req_t r);
    mem_rsp_valid <= 1;
    mem_rsp.fault <= is_bad(r.addr);
    mem_rsp.rdata <= mread(r.addr, 1 << int'(r.size));
    if (r.we && !is_bad(r.addr)) mwrite(r.addr, 1 << int'(r.size), r.wdata);
  endtask
  always @(posedge clk) begin
    mem_rsp_valid <= 0;
    if (pend) begin
      if (lat <= 2) begin respond(preq); pend <= 0; end
      else lat <= lat - 1;
    end else if (mem_req_valid && mem_req_ready) begin
      if ($urandom % 2) respond(mem_req);
      else begin pend <= 1; preq <= mem_req; lat <= 2 + int'($urandom % 2); end
    end
    if (mem_req_valid && !mem_req_ready) m_mem_stall++;
    mem_req_ready <= ($urandom % 4 != 0);
  end

  // ------------------------------------------------------------ uop issue
  function automatic sve_uop_t U(sve_op_e op, esz_e esz);
    sve_uop_t u = '0;
    u.op = op; u.esz = esz;
    return u;
  endfunction

  int          n_insn;       // instructions executed by the current program
  logic        last_trap;
  logic [63:0] last_xd;
  task automatic issue(sve_uop_t u);
    @(negedge clk);
    while (!uop_ready) @(negedge clk);
    uop = u; uop_valid = 1;
    @(negedge clk);
    uop_valid = 0; uop = '0;
    while (!done) @(negedge clk);
    last_trap = trap;
    last_xd   = xd;
    n_insn++;
  endtask
  task automatic scalar();   // a scalar instruction of the host
    n_insn++;
  endtask

  task automatic set_vl(int len);   // ZCR_EL1.LEN = len - 1, running at EL1
    @(negedge clk);
    cur_el = 1; zcr_we = 1; zcr_wel = 1; zcr_wlen = 4'(len - 1);
    @(negedge clk);
    zcr_we = 0;
    #1;
    expect_eq("eff_len", 64'(eff_len), 64'(len));
    m_vl_switch++;
  endtask

  // ---------------------------------------------------------------- daxpy
  task automatic daxpy(int n, int len, int exp_insn);
    logic [63:0] X = 64'h1000, Y = 64'h3000, A = 64'h0f00, x4, x3;
    logic [63:0] yref [512];
    sve_uop_t u;
    set_vl(len);
    mwrite(A, 8, $realtobits(8.0));
    for (int i = 0; i < n + 1; i++) begin
      real xv, yv;
      xv = (n == 3) ? real'(i + 4) : real'(i + 4) * ((i % 3 == 2) ? 0.1 : 1.0);
      yv = (n == 3) ? real'(i) : real'(i) / 3.0;
      mwrite(X + 64'(8 * i), 8, $realtobits(xv));
      mwrite(Y + 64'(8 * i), 8, $realtobits(yv));
      yref[i] = (i < n) ? $realtobits(8.0 * xv + yv) : $realtobits(yv);
    end
    n_insn = 0;
    scalar(); x3 = 64'(n);              // ldrsw x3, [x3]
    scalar(); x4 = 0;                   // mov x4, #0
    u = U(OP_WHILELT, ESZ_D); u.pd = 0; u.xn = x4; u.xm = x3; issue(u);
    u = U(OP_LD1R, ESZ_D); u.zd = 0; u.pg = 0; u.xn = A; issue(u);      // ld1rd z0.d
    while (1) begin
      u = U(OP_LD1, ESZ_D); u.zd = 1; u.pg = 0; u.xn = X; u.xm = x4; issue(u);
      u = U(OP_LD1, ESZ_D); u.zd = 2; u.pg = 0; u.xn = Y; u.xm = x4; issue(u);
      u = U(OP_FMLA, ESZ_D); u.zd = 2; u.pg = 0; u.zn = 1; u.zm = 0; issue(u);
      u = U(OP_ST1, ESZ_D); u.zd = 2; u.pg = 0; u.xn = Y; u.xm = x4; issue(u);
      u = U(OP_INC, ESZ_D); u.xn = x4; u.imm = 1; issue(u); x4 = last_xd;   // incd x4
      u = U(OP_WHILELT, ESZ_D); u.pd = 0; u.xn = x4; u.xm = x3; issue(u);
      if (nzcv.n && !nzcv.z && nzcv.c) m_partial_while++;
      scalar();                          // b.first .loop
      if (!nzcv.n) break;
    end
    expect_eq($sformatf("daxpy n=%0d VL=%0d: instruction count before ret", n, len * 128),
              64'(n_insn), (exp_insn >= 0) ? 64'(exp_insn) : 64'(4 + 7 * ((n + 2 * len - 1) / (2 * len))));
    for (int i = 0; i < n + 1; i++)
      expect_eq($sformatf("daxpy VL=%0d y[%0d]", len * 128, i), mread(Y + 64'(8 * i), 8), yref[i]);
  endtask

  // --------------------------------------------------------------- strlen
  task automatic strlen_run(logic [63:0] s, int len_str, int vl, bit expect_trap);
    logic [63:0] x0, x1;
    sve_uop_t u;
    set_vl(vl);
    for (int i = 0; i < len_str; i++) mem[s + 64'(i)] = 8'(8'h41 + i % 26);
    if (!expect_trap) mem[s + 64'(len_str)] = 8'h00;
    x0 = s;
    x1 = x0;                                                        // mov x1, x0
    u = U(OP_PTRUE, ESZ_B); u.pd = 0; issue(u);                     // ptrue p0.b
    last_trap = 0;
    while (1) begin
      u = U(OP_SETFFR, ESZ_B); issue(u);                            // setffr
      u = U(OP_LDFF1, ESZ_B); u.zd = 0; u.pg = 0; u.xn = x1; issue(u);
      if (last_trap) break;
      u = U(OP_RDFFR, ESZ_B); u.pd = 1; u.pg = 0; issue(u);         // rdffr p1.b, p0/z
      u = U(OP_CMPEQ, ESZ_B); u.pd = 2; u.pg = 1; u.zn = 0; u.use_imm = 1; u.imm = 0;
      issue(u);                                                     // cmpeq p2.b, p1/z, z0.b, #0
      u = U(OP_BRKB, ESZ_B); u.pd = 2; u.pg = 1; u.pn = 2; u.setflags = 1;
      issue(u);                                                     // brkbs p2.b, p1/z, p2.b
      m_brk++;
      u = U(OP_INCP, ESZ_B); u.pm = 2; u.xn = x1; issue(u); x1 = last_xd;  // incp x1, p2.b
      if (nzcv.c) break;                                            // b.last .loop
    end
    checks++;
    if (last_trap !== expect_trap) begin
      failures++; $display("FAIL strlen trap=%0d expected %0d", last_trap, expect_trap);
    end
    if (expect_trap) begin
      m_trap++;
      expect_eq("strlen fault address", fault_addr, BAD_LO);
    end else
      expect_eq($sformatf("strlen len=%0d VL=%0d", len_str, vl * 128), x1 - x0, 64'(len_str));
  endtask

  // ------------------------------------------------------------ linked list
  task automatic list_run(int nodes, int vl);
    logic [63:0] x1, head, ref_x;
    sve_uop_t u;
    int guard;
    set_vl(vl);
    // nodes scattered in memory: val at +0, next at +8
    ref_x = 0;
    head = 64'h8000;
    for (int i = 0; i < nodes; i++) begin
      logic [63:0] a, nxt, v;
      a   = 64'h8000 + 64'(i * 48 + (i % 3) * 16);
      nxt = (i == nodes - 1) ? 0 : 64'h8000 + 64'((i + 1) * 48 + ((i + 1) % 3) * 16);
      v   = {$urandom, $urandom};
      mwrite(a, 8, v); mwrite(a + 8, 8, nxt);
      ref_x ^= v;
    end
    u = U(OP_PTRUE, ESZ_D); u.pd = 0; issue(u);                        // P0 = partition
    u = U(OP_DUP, ESZ_D); u.zd = 0; u.use_imm = 1; u.imm = 0; issue(u); // dup z0.d, #0
    x1 = head;                                                         // adr x1, head
    guard = 0;
    while (1) begin
      u = U(OP_PFALSE, ESZ_D); u.pd = 1; issue(u);                     // pfalse p1.d
      while (1) begin
        u = U(OP_PNEXT, ESZ_D); u.pd = 1; u.pg = 0; issue(u);          // pnext p1.d, p0, p1.d
        m_pnext++;
        u = U(OP_CPY, ESZ_D); u.zd = 1; u.pg = 1; u.xn = x1; issue(u); // cpy z1.d, p1/m, x1
        scalar(); x1 = mread(x1 + 8, 8);                               // ldr x1, [x1, #8]
        u = U(OP_CTERMEQ, ESZ_D); u.xn = x1; u.xm = 0; issue(u);       // ctermeq x1, xzr
        if (nzcv.n != nzcv.v) begin m_cterm_stop++; break; end         // b.tcont inner
      end
      u = U(OP_BRKA, ESZ_B); u.pd = 2; u.pg = 0; u.pn = 1; issue(u);   // brka p2.b, p0/z, p1.b
      m_brk++;
      u = U(OP_LD1_GATHER, ESZ_D); u.zd = 2; u.pg = 2; u.zn = 1; u.imm = 0; issue(u);
      m_gather++;
      u = U(OP_EOR, ESZ_D); u.zd = 0; u.pg = 2; u.zm = 2; issue(u);    // eor z0.d, p2/m, z0.d, z2.d
      if (x1 == 0) break;                                              // cbnz x1, loop
      guard++;
      if (guard > 1000) break;
    end
    u = U(OP_EORV, ESZ_D); u.pg = 0; u.zn = 0; issue(u);               // eorv d0, p0, z0.d
    m_reduce++;
    expect_eq($sformatf("list xor nodes=%0d VL=%0d", nodes, vl * 128), last_xd, ref_x);
  endtask

  // --------------------------------------------------------------- others
  task automatic misc();
    sve_uop_t u;
    logic [63:0] lo, hi;
    set_vl(16);
    // Advanced SIMD write clears the upper bits of Z3
    u = U(OP_DUP, ESZ_D); u.zd = 3; u.use_imm = 1; u.imm = '1; issue(u);
    lo = 64'h0123_4567_89ab_cdef; hi = 64'h1111_2222_3333_4444;
    @(negedge clk); v_we = 1; v_wa = 3; v_wd = {hi, lo};
    @(negedge clk); v_we = 0; v_ra = 3;
    #1 expect_eq("V3 read", v_rd[63:0], lo);
    u = U(OP_PTRUE, ESZ_D); u.pd = 4; issue(u);
    u = U(OP_UADDV, ESZ_D); u.pg = 4; u.zn = 3; issue(u);
    expect_eq("upper bits cleared by Advanced SIMD write", last_xd, lo + hi);
    m_asimd_zero++;
    // movprfx z5, p4/z, z3 ; add z5.d, p4/m, z5.d, z3.d  ->  z5 = 2 * z3
    u = U(OP_MOVPRFX, ESZ_D); u.zd = 5; u.zn = 3; u.pg = 4; u.zeroing = 1; issue(u);
    u = U(OP_ADD, ESZ_D); u.zd = 5; u.zm = 3; u.pg = 4; issue(u);
    u = U(OP_UADDV, ESZ_D); u.pg = 4; u.zn = 5; issue(u);
    expect_eq("movprfx + add", last_xd, 2 * (lo + hi));
    m_movprfx++;
    // governing predicate P12 given to a data-processing op selects P4
    u = U(OP_PFALSE, ESZ_D); u.pd = 12; issue(u);
    u = U(OP_UADDV, ESZ_D); u.pg = 12; u.zn = 3; issue(u);
    expect_eq("data op uses P0-P7 only", last_xd, lo + hi);
    m_p8_restrict++;
    // ... while a predicate op may use P12
    u = U(OP_RDFFR, ESZ_D); u.pd = 6; u.pg = 12; issue(u);
    u = U(OP_UADDV, ESZ_D); u.pg = 6; u.zn = 3; issue(u);
    expect_eq("predicate op uses P8-P15", last_xd, 0);
    // fadda: strictly ordered sum, bit-identical to the sequential loop
    begin
      real acc;
      logic [63:0] base = 64'h9000;
      acc = 1.0e16;
      for (int i = 0; i < 32; i++) begin
        real v;
        v = (i % 2) ? 1.0 : -0.75 * real'(i);
        mwrite(base + 64'(8 * i), 8, $realtobits(v));
        if (i % 4 != 3) acc = acc + v;
      end
      u = U(OP_PTRUE, ESZ_D); u.pd = 6; issue(u);
      // p7 = (index & 3) != 3
      u = U(OP_INDEX, ESZ_D); u.zd = 8; u.xn = 0; u.use_imm = 1; u.imm = 1; issue(u);
      u = U(OP_DUP, ESZ_D); u.zd = 9; u.use_imm = 1; u.imm = 3; issue(u);
      u = U(OP_AND, ESZ_D); u.zd = 8; u.zm = 9; u.unpred = 1; u.zn = 8; issue(u);
      u = U(OP_CMPNE, ESZ_D); u.pd = 7; u.pg = 6; u.zn = 8; u.use_imm = 1; u.imm = 3; issue(u);
      u = U(OP_LD1, ESZ_D); u.zd = 10; u.pg = 6; u.xn = base; u.xm = 0; issue(u);
      u = U(OP_FADDA, ESZ_D); u.pg = 7; u.zm = 10; u.xn = $realtobits(1.0e16); issue(u);
      expect_eq("fadda ordered sum", last_xd, $realtobits(acc));
      m_fadda++;
    end
    // ZCR_EL2 cannot be written from EL1
    @(negedge clk); cur_el = 1; zcr_we = 1; zcr_wel = 2; zcr_wlen = 0;
    #1; checks++; if (!zcr_wr_denied) failures++; else m_zcr_denied++;
    @(negedge clk); zcr_we = 0;
    #1 expect_eq("eff_len after denied write", 64'(eff_len), 16);
    // instruction class decode: an SVE predicate instruction word
    insn = 32'h2518_e3e0;   // bits 28:25 = 0010, {31:29,24} = 0011
    #1; checks++;
    if (!insn_is_sve || insn_sve_group != 4'd5) failures++; else m_insn_class++;
  endtask

  initial begin
    uop_valid = 0; uop = '0; cur_el = 1; zcr_we = 0; zcr_wel = 0; zcr_wlen = 0;
    v_we = 0; v_wa = 0; v_wd = '0; v_ra = 0; insn = 0; pend = 0; mem_req_ready = 0;
    mem_rsp_valid = 0; mem_rsp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Fig. 3: n = 3 at 128 and 256 bits
    daxpy(3, 1, 18);
    daxpy(3, 2, 11);
    // the evaluated lengths and the full 2048 bits
    daxpy(21, 4, -1);
    daxpy(45, 16, -1);
    daxpy(7, 3, -1);       // 384 bits: any multiple of 128

    strlen_run(BAD_LO - 64'd40, 25, 4, 0);   // ends in front of the bad page: fault suppressed
    strlen_run(64'h5003, 300, 2, 0);
    strlen_run(BAD_LO - 64'd70, 69, 16, 0);  // terminator is the last byte before the page
    strlen_run(BAD_LO - 64'd20, 20, 1, 1);   // runs into the bad page: trap

    list_run(5, 1);
    list_run(3, 4);
    list_run(40, 16);

    misc();

    checks++;
    if (m_partial_while == 0 || ff_seen == 0 || m_trap == 0 || m_vl_switch == 0 ||
        m_zcr_denied == 0 || m_asimd_zero == 0 || m_pnext == 0 || m_cterm_stop == 0 ||
        m_brk == 0 || m_gather == 0 || m_mem_stall == 0 || m_movprfx == 0 || m_reduce == 0 ||
        m_p8_restrict == 0 || m_insn_class == 0 || m_fadda == 0) failures++;
    $display("mechanisms: partial-while=%0d ff-suppress=%0d trap=%0d vl-switch=%0d zcr-denied=%0d",
             m_partial_while, ff_seen, m_trap, m_vl_switch, m_zcr_denied);
    $display("            asimd-zero=%0d pnext=%0d cterm-stop=%0d brk=%0d gather=%0d mem-stall=%0d",
             m_asimd_zero, m_pnext, m_cterm_stop, m_brk, m_gather, m_mem_stall);
    $display("            movprfx=%0d reduce=%0d p0-p7=%0d insn-class=%0d fadda=%0d",
             m_movprfx, m_reduce, m_p8_restrict, m_insn_class, m_fadda);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // first-fault suppressions are observed on the FFR clear strobe
  int ff_seen = 0;
  always @(posedge clk) if (rst_n && dut.ls_ffr_clr_we) ff_seen++;
endmodule
