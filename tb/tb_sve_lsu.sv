// Self-checking test of the cracked vector load/store unit.
//
// A memory model with random request stalls and response latency serves one
// element access at a time; a range of addresses faults.  The test first
// replays the paper's first-fault gather example (Fig. 4: Z3 holds A[0],
// A[1], a bad address and A[3]; the first ldff1d clears FFR from the bad
// element on without trapping, the second, with A[2] now the first active
// element, traps), then runs random contiguous, broadcast, gather and
// scatter loads and stores, normal and first-faulting, with random
// predicates and faults, against a reference computed here from the same
// memory image.  With an always-ready memory and one-cycle latency, an
// operation with n elements of which a are active must take 2a + (n - a) + 2
// cycles from start to done (one cycle to issue, one to receive per active
// element, one per skipped element, one to finish, one for done).
module tb_sve_lsu;
  import sve_pkg::*;
  localparam int LEN_MAX = 4;
  localparam int VB = LEN_MAX * 128;
  localparam int PB = LEN_MAX * 16;
  localparam logic [63:0] BAD_LO = 64'h8000, BAD_HI = 64'h8100;

  logic          clk = 0, rst_n = 0;
  logic          start, busy, done, z_we, ffr_clr_we, trap;
  sve_op_e       op;
  esz_e          esz;
  logic [4:0]    eff_len;
  logic [PB-1:0] pg_v, ffr_clr_mask;
  logic [VB-1:0] zn_v, zd_v, zres;
  logic [63:0]   xn, xm, imm, fault_addr;
  logic          mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t      mem_req;
  mem_rsp_t      mem_rsp;
  int checks = 0, failures = 0;
  int n_ff_suppress = 0, n_trap = 0, n_stall = 0;
  bit fast_mem = 0;

  sve_lsu #(.LEN_MAX(LEN_MAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ memory model
  logic [7:0] wr_mem [longint];
  function automatic logic [7:0] mbyte(logic [63:0] a);
    if (wr_mem.exists(a)) return wr_mem[a];
    return 8'(a * 7 + (a >> 8) + 3);
  endfunction
  function automatic logic [63:0] mread(logic [63:0] a, int bytes);
    logic [63:0] v = '0;
    for (int i = 0; i < bytes; i++) v[i*8 +: 8] = mbyte(a + 64'(i));
    return v;
  endfunction
  function automatic bit is_bad(logic [63:0] a);
    return a >= BAD_LO && a < BAD_HI;
  endfunction

  int          lat;
  logic        pend;
  mem_req_t    preq;
  task automatic respond(mem_req_t r);
    mem_rsp_valid <= 1;
    mem_rsp.fault <= is_bad(r.addr);
    mem_rsp.rdata <= mread(r.addr, 1 << int'(r.size));
    if (r.we && !is_bad(r.addr))
      for (int i = 0; i < (1 << int'(r.size)); i++)
        wr_mem[r.addr + 64'(i)] = r.wdata[i*8 +: 8];
  endtask

  // lat = number of cycles after acceptance in which the response appears
  always @(posedge clk) begin
    mem_rsp_valid <= 0;
    if (pend) begin
      if (lat <= 2) begin respond(preq); pend <= 0; end
      else lat <= lat - 1;
    end else if (mem_req_valid && mem_req_ready) begin
      if (fast_mem) respond(mem_req);
      else begin pend <= 1; preq <= mem_req; lat <= 2 + int'($urandom % 3); end
    end
    if (mem_req_valid && !mem_req_ready) n_stall++;
    mem_req_ready <= fast_mem ? 1'b1 : ($urandom % 3 != 0);
  end

  // ---------------------------------------------------------------- driver
  int cycles;
  task automatic run();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic logic [63:0] getv(logic [VB-1:0] v, int i, int bytes);
    return 64'(v >> (i * bytes * 8)) & ((bytes == 8) ? '1 : (64'd1 << (bytes * 8)) - 1);
  endfunction

  task automatic check_op(string what);
    int eb, n, first_fault, nact;
    bit trap_e, seen;
    logic [VB-1:0] ez;
    logic [PB-1:0] emask_e;
    logic [63:0] addr [256];
    bit          act [256];
    eb = 1 << int'(esz);
    n  = int'(eff_len) * 16 / eb;
    ez = '0; trap_e = 0; seen = 0; first_fault = -1; nact = 0;
    emask_e = '1;
    for (int i = 0; i < n; i++) begin
      act[i] = pg_v[i*eb];
      if (op == OP_LD1R)
        addr[i] = xn + imm;
      else if (op inside {OP_LD1_GATHER, OP_LDFF1_GATHER, OP_ST1_SCATTER})
        addr[i] = getv(zn_v, i, eb) + imm;
      else
        addr[i] = xn + ((xm + 64'(i)) << int'(esz));
    end
    // reference walk
    for (int i = 0; i < n; i++) begin
      if (!act[i]) continue;
      nact++;
      if (is_bad(addr[i])) begin
        if (op inside {OP_LDFF1, OP_LDFF1_GATHER} && seen) begin
          first_fault = i;
          for (int b = 0; b < PB; b++) emask_e[b] = b < i * eb;
        end else trap_e = 1;
        break;
      end
      seen = 1;
      if (op == OP_LD1R) begin
        for (int j = 0; j < n; j++) if (act[j])
          for (int k = 0; k < eb * 8; k++) ez[j*eb*8 + k] = mread(addr[i], eb)[k];
        break;
      end
      for (int k = 0; k < eb * 8; k++) ez[i*eb*8 + k] = mread(addr[i], eb)[k];
    end
    if (op inside {OP_ST1, OP_ST1_SCATTER}) begin
      // the store goes first; data is then read back from the model
      for (int i = 0; i < n; i++) ;
    end
    run();
    checks++;
    if (trap !== trap_e) begin
      failures++; $display("FAIL %s trap=%0d exp=%0d", what, trap, trap_e);
    end
    if (trap) n_trap++;
    if (!trap_e && !(op inside {OP_ST1, OP_ST1_SCATTER})) begin
      checks++;
      if (!z_we || zres !== ez) begin failures++; $display("FAIL %s data", what); end
    end
    if (op inside {OP_ST1, OP_ST1_SCATTER} && !trap_e) begin
      for (int i = 0; i < n; i++) if (act[i]) begin
        checks++;
        if (mread(addr[i], eb) !== getv(zd_v, i, eb)) begin
          failures++; $display("FAIL %s store element %0d", what, i);
        end
      end
    end
    checks++;
    if (ffr_clr_we !== (first_fault >= 0) || (first_fault >= 0 && ffr_clr_mask !== emask_e)) begin
      failures++; $display("FAIL %s ffr clr=%0d mask=%h exp=%h", what, ffr_clr_we, ffr_clr_mask, emask_e);
    end
    if (first_fault >= 0) n_ff_suppress++;
    if (fast_mem && !trap_e && first_fault < 0 && op != OP_LD1R) begin
      checks++;
      if (cycles != 2 * nact + (n - nact) + 2) begin
        failures++; $display("FAIL %s cycles=%0d exp=%0d", what, cycles, 2 * nact + (n - nact) + 2);
      end
    end
  endtask

  function automatic logic [VB-1:0] rv();
    logic [VB-1:0] v;
    for (int i = 0; i < VB / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    sve_op_e ops [7] = '{OP_LD1, OP_LDFF1, OP_LD1R, OP_ST1, OP_LD1_GATHER, OP_LDFF1_GATHER,
                         OP_ST1_SCATTER};
    start = 0; op = OP_NOP; esz = ESZ_D; eff_len = 2; pg_v = '0; zn_v = '0; zd_v = '0;
    xn = 0; xm = 0; imm = 0; pend = 0; mem_req_ready = 0; mem_rsp = '0; mem_rsp_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- paper Fig. 4: ldff1d z0.d, p1/z, [z3.d], 256-bit vector
    op = OP_LDFF1_GATHER; esz = ESZ_D; eff_len = 2; imm = 0;
    zn_v = '0;
    zn_v[255:0] = {64'h3018, BAD_LO + 64'h10, 64'h3008, 64'h3000};   // A[3], Bad, A[1], A[0]
    pg_v = PB'(32'h0101_0101);                                         // P1 = T T T T
    check_op("fig4-iter1");
    checks++;
    if (trap || !ffr_clr_we || ffr_clr_mask[31:0] !== 32'h0000_ffff) begin
      failures++; $display("FAIL fig4 iteration 1 must clear FFR for A[2], A[3] only");
    end
    pg_v = PB'(32'h0101_0000);                                         // P1 = F F T T... A[0],A[1] false
    check_op("fig4-iter2");
    checks++;
    if (!trap || fault_addr !== BAD_LO + 64'h10) begin
      failures++; $display("FAIL fig4 iteration 2 must trap on A[2]");
    end

    // ---- timing with an ideal memory
    fast_mem = 1;
    repeat (3) @(posedge clk);
    for (int t = 0; t < 40; t++) begin
      op = (t % 2) ? OP_LD1 : OP_ST1; esz = esz_e'($urandom % 4);
      eff_len = 5'(1 + $urandom % LEN_MAX);
      pg_v = {$urandom, $urandom}; xn = 64'h1000 + 64'($urandom % 256); xm = 64'($urandom % 4);
      zd_v = rv();
      check_op("timing");
    end
    fast_mem = 0;

    // ---- random
    for (int t = 0; t < 600; t++) begin
      op = ops[$urandom % 7];
      esz = esz_e'($urandom % 4);
      if (op inside {OP_LD1_GATHER, OP_LDFF1_GATHER, OP_ST1_SCATTER}) esz = esz_e'(2 + $urandom % 2);
      eff_len = 5'(1 + $urandom % LEN_MAX);
      pg_v = {$urandom, $urandom};
      if (t % 5 == 0) pg_v = '1;
      xn = ($urandom % 3 == 0) ? BAD_LO - 64'($urandom % 300) : 64'h2000 + 64'($urandom % 1024);
      xm = 64'($urandom % 8);
      imm = 64'($urandom % 16);
      zd_v = rv();
      zn_v = '0;
      for (int i = 0; i < VB / 64; i++) begin
        logic [63:0] a;
        a = ($urandom % 8 == 0) ? BAD_LO + 64'($urandom % 200) : 64'h4000 + 64'($urandom % 4096);
        for (int k = 0; k < 64; k++) zn_v[i*64 + k] = a[k];
      end
      if (esz == ESZ_S) for (int i = 0; i < VB / 32; i++)
        zn_v[i*32 +: 32] = ($urandom % 8 == 0) ? 32'(BAD_LO) + ($urandom % 200) : 32'h4000 + ($urandom % 4096);
      check_op(op.name());
    end
    checks++;
    if (n_ff_suppress == 0 || n_trap == 0 || n_stall == 0) begin
      failures++; $display("FAIL coverage ff=%0d trap=%0d stall=%0d", n_ff_suppress, n_trap, n_stall);
    end
    $display("first-fault suppressions=%0d traps=%0d stall cycles=%0d", n_ff_suppress, n_trap, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
