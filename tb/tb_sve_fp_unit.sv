// Self-checking test of the floating-point unit: vector fmla under random
// predicates and vector lengths (merging of inactive elements, zeros beyond
// the vector length) and fadda, whose result must equal the sequential
// left-to-right sum of the active elements computed here in double
// precision, and which must finish 2 x eff_len + 2 cycles after start (one
// cycle per 64-bit element slot, one to finish, one for done).  Products are
// made exact (short mantissas) so the simulator's a*b + c is the fused value.
module tb_sve_fp_unit;
  import sve_pkg::*;
  localparam int LEN_MAX = 2;
  localparam int VB = LEN_MAX * 128;
  localparam int PB = LEN_MAX * 16;
  logic          clk = 0, rst_n = 0;
  sve_op_e       op;
  logic [4:0]    eff_len;
  logic [PB-1:0] pg_v;
  logic [VB-1:0] zd_v, zn_v, zm_v, zres;
  logic [63:0]   xn, xd;
  logic          z_we, start, busy, done;
  int checks = 0, failures = 0;

  sve_fp_unit #(.LEN_MAX(LEN_MAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rshort();
    logic [51:0] f = {$urandom, $urandom};
    f = f & ~((52'd1 << 27) - 52'd1);
    return {1'($urandom), 11'(900 + $urandom % 200), f};
  endfunction
  function automatic logic [63:0] rfull();
    return {1'($urandom), 11'(950 + $urandom % 120), 20'($urandom), $urandom};
  endfunction

  initial begin
    op = OP_NOP; eff_len = 1; pg_v = '0; zd_v = '0; zn_v = '0; zm_v = '0; xn = 0; start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      logic [VB-1:0] e;
      @(negedge clk);
      op = OP_FMLA;
      eff_len = 5'(1 + $urandom % LEN_MAX);
      pg_v = {$urandom};
      for (int k = 0; k < VB / 64; k++) begin
        zn_v[k*64 +: 64] = rshort(); zm_v[k*64 +: 64] = rshort(); zd_v[k*64 +: 64] = rfull();
      end
      #1;
      for (int k = 0; k < VB / 64; k++) begin
        real p;
        p = $bitstoreal(zn_v[k*64 +: 64]) * $bitstoreal(zm_v[k*64 +: 64]) + $bitstoreal(zd_v[k*64 +: 64]);
        if (k >= int'(eff_len) * 2) e[k*64 +: 64] = '0;
        else if (pg_v[k*8]) e[k*64 +: 64] = $realtobits(p);
        else e[k*64 +: 64] = zd_v[k*64 +: 64];
      end
      checks++;
      if (!z_we || zres !== e) begin failures++; $display("FAIL fmla t=%0d", t); end
    end
    for (int t = 0; t < 300; t++) begin
      real acc;
      int cyc, n;
      @(negedge clk);
      op = OP_FADDA;
      eff_len = 5'(1 + $urandom % LEN_MAX);
      pg_v = {$urandom};
      for (int k = 0; k < VB / 64; k++) zm_v[k*64 +: 64] = rfull();
      xn = rfull();
      n = int'(eff_len) * 2;
      acc = $bitstoreal(xn);
      for (int k = 0; k < n; k++) if (pg_v[k*8]) acc = acc + $bitstoreal(zm_v[k*64 +: 64]);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (xd !== $realtobits(acc)) begin failures++; $display("FAIL fadda t=%0d", t); end
      checks++;
      if (cyc != n + 2) begin failures++; $display("FAIL fadda cycles %0d exp %0d", cyc, n + 2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
