// Self-checking test of the vector integer datapath: random operations,
// element sizes, vector lengths and predication forms (merging, zeroing,
// unpredicated) against an element-level reference model computed here in
// 64-bit arithmetic and truncated to the element size.  Covers dup, cpy,
// index, movprfx, add, sub, mul, and, orr, eor, mla and the four compares
// with their flags, plus the paper's daxpy step (z2 += z1 * z0 under p0).
module tb_sve_valu;
  import sve_pkg::*;
  localparam int LEN_MAX = 4;
  localparam int VB = LEN_MAX * 128;
  localparam int PB = LEN_MAX * 16;
  sve_op_e       op;
  esz_e          esz;
  logic          zeroing, unpred, use_imm;
  logic [4:0]    eff_len;
  logic [PB-1:0] pg_v, pres;
  logic [VB-1:0] zd_v, zn_v, zm_v, zres;
  logic [63:0]   xn, xm, imm;
  logic          z_we, p_we;
  nzcv_t         flags;
  int checks = 0, failures = 0;

  sve_valu #(.LEN_MAX(LEN_MAX)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [VB-1:0] rv();
    logic [VB-1:0] v;
    for (int i = 0; i < VB / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic longint sx(logic [63:0] v, int w);
    return (w == 64) ? longint'(v) : longint'(v << (64 - w)) >>> (64 - w);
  endfunction

  task automatic check();
    int w, eb, n, nmax, first_i, last_i;
    logic [VB-1:0] ez;
    logic [PB-1:0] ep;
    logic e_zwe, e_pwe, anyt;
    nzcv_t ef;
    #1;
    w = 8 << int'(esz); eb = w / 8; n = (int'(eff_len) * 16) / eb; nmax = VB / w;
    ez = '0; ep = '0;
    e_zwe = !(op inside {OP_CMPEQ, OP_CMPNE, OP_CMPLT, OP_CMPGE});
    e_pwe = !e_zwe;
    first_i = -1; last_i = -1; anyt = 0;
    for (int i = 0; i < nmax; i++) begin
      logic [63:0] d, a, b, m, r, s2;
      logic act, c;
      m  = (w == 64) ? '1 : (64'd1 << w) - 1;
      d  = 64'(zd_v >> (i*w)) & m;
      a  = 64'(zn_v >> (i*w)) & m;
      b  = use_imm ? (imm & m) : (64'(zm_v >> (i*w)) & m);
      s2 = unpred ? a : d;
      act = pg_v[i*eb];
      r = d;
      unique case (op)
        OP_DUP:     r = use_imm ? imm : xn;
        OP_INDEX:   r = xn + 64'(i) * (use_imm ? imm : xm);
        OP_CPY:     r = xn;
        OP_MOVPRFX: r = a;
        OP_ADD:     r = s2 + b;
        OP_SUB:     r = s2 - b;
        OP_MUL:     r = s2 * b;
        OP_AND:     r = s2 & b;
        OP_ORR:     r = s2 | b;
        OP_EOR:     r = s2 ^ b;
        OP_MLA:     r = d + a * (64'(zm_v >> (i*w)) & m);
        default: ;
      endcase
      if (i < n) begin
        if (op inside {OP_DUP, OP_INDEX} || unpred || act) for (int j = 0; j < w; j++) ez[i*w + j] = r[j];
        else if (!zeroing) for (int j = 0; j < w; j++) ez[i*w + j] = d[j];
        // compares
        unique case (op)
          OP_CMPEQ: c = a == b;
          OP_CMPNE: c = a != b;
          OP_CMPLT: c = sx(a, w) <  sx(b, w);
          OP_CMPGE: c = sx(a, w) >= sx(b, w);
          default:  c = 0;
        endcase
        ep[i*eb] = c && act;
        if (act) begin
          if (first_i < 0) first_i = i;
          last_i = i;
          if (c) anyt = 1;
        end
      end
    end
    ef.n = first_i >= 0 && ep[first_i*eb];
    ef.z = !anyt;
    ef.c = !(last_i >= 0 && ep[last_i*eb]);
    ef.v = 0;
    checks++;
    if (z_we !== e_zwe || p_we !== e_pwe || (e_zwe && zres !== ez) ||
        (e_pwe && (pres !== ep || flags !== ef))) begin
      failures++;
      $display("FAIL op=%s esz=%0d len=%0d z=%0d u=%0d i=%0d", op.name(), esz, eff_len,
               zeroing, unpred, use_imm);
    end
  endtask

  initial begin
    sve_op_e ops [15] = '{OP_DUP, OP_CPY, OP_INDEX, OP_MOVPRFX, OP_ADD, OP_SUB, OP_MUL,
                          OP_AND, OP_ORR, OP_EOR, OP_MLA, OP_CMPEQ, OP_CMPNE, OP_CMPLT,
                          OP_CMPGE};
    // daxpy step of the paper, 128-bit: z2 = {1,0} + {5,4} * {8,8} under p0 = {T,T}
    op = OP_MLA; esz = ESZ_D; zeroing = 0; unpred = 0; use_imm = 0; eff_len = 1;
    pg_v = PB'(16'h0101); xn = 0; xm = 0; imm = 0;
    zd_v = '0; zn_v = '0; zm_v = '0;
    zd_v[127:0] = {64'd1, 64'd0}; zn_v[127:0] = {64'd5, 64'd4}; zm_v[127:0] = {64'd8, 64'd8};
    check();
    checks++;
    if (zres[127:0] !== {64'd41, 64'd32}) begin failures++; $display("FAIL daxpy step"); end
    // second iteration, p0 = {F,T}: z2 = {0,50}
    pg_v = PB'(16'h0001); zd_v[127:0] = {64'd0, 64'd2}; zn_v[127:0] = {64'd0, 64'd6};
    op = OP_MLA; check();
    checks++;
    if (zres[127:0] !== {64'd0, 64'd50}) begin failures++; $display("FAIL daxpy step 2"); end
    for (int t = 0; t < 4000; t++) begin
      op      = ops[$urandom % 15];
      esz     = esz_e'($urandom % 4);
      eff_len = 5'(1 + $urandom % LEN_MAX);
      zeroing = $urandom % 2;
      unpred  = (op inside {OP_MOVPRFX, OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_ORR, OP_EOR}) &&
                ($urandom % 3 == 0);
      use_imm = (op inside {OP_DUP, OP_INDEX, OP_ADD, OP_SUB, OP_CMPEQ, OP_CMPNE, OP_CMPLT,
                            OP_CMPGE}) && ($urandom % 2 == 0);
      pg_v = {$urandom, $urandom};
      zd_v = rv(); zn_v = rv(); zm_v = rv();
      if ($urandom % 3 == 0) zm_v = zn_v;
      xn = {$urandom, $urandom}; xm = {$urandom, $urandom};
      imm = ($urandom % 2) ? 64'($urandom % 8) : {$urandom, $urandom};
      if (use_imm && $urandom % 2 == 0) imm = 64'(zn_v[63:0]);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
