// Self-checking test of the double-precision fused multiply-add.
// References: (1) operands whose product is exact in double precision, for
// which the fused result equals the simulator's a*b + c; (2) cases whose
// fused result differs from separate multiply and add, e.g.
// (1 + 2^-52)(1 - 2^-52) - 1 = -2^-104; (3) special values: NaN, infinities,
// inf x 0, signed zeros, overflow, and results in the subnormal range.
module tb_sve_fma64;
  logic [63:0] a, b, c, r;
  int checks = 0, failures = 0;

  sve_fma64 dut (.a, .b, .c, .r);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic t(logic [63:0] ia, logic [63:0] ib, logic [63:0] ic, logic [63:0] exp, string what);
    a = ia; b = ib; c = ic;
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      $display("FAIL %s: %h * %h + %h = %h, expected %h", what, a, b, c, r, exp);
    end
  endtask

  // random double with a short mantissa (k fraction bits kept) and exponent in range
  function automatic logic [63:0] rshort(int k, int elo, int ehi);
    logic [51:0] f;
    f = {$urandom, $urandom};
    f = f & ~((52'd1 << (52 - k)) - 52'd1);
    return {1'($urandom), 11'(elo + int'($urandom % (ehi - elo + 1))), f};
  endfunction
  function automatic logic [63:0] rfull(int elo, int ehi);
    return {1'($urandom), 11'(elo + int'($urandom % (ehi - elo + 1))), 20'($urandom), $urandom};
  endfunction

  initial begin
    real ra, rb, rc;
    // (2) fused behaviour
    t(64'h3ff0_0000_0000_0001, 64'h3fef_ffff_ffff_fffe, 64'hbff0_0000_0000_0000,
      64'hb970_0000_0000_0000, "fused (1+e)(1-e)-1");
    // daxpy numbers of the paper: 8*4+0, 8*5+1, 8*6+2
    t($realtobits(4.0), $realtobits(8.0), $realtobits(0.0), $realtobits(32.0), "daxpy 0");
    t($realtobits(5.0), $realtobits(8.0), $realtobits(1.0), $realtobits(41.0), "daxpy 1");
    t($realtobits(6.0), $realtobits(8.0), $realtobits(2.0), $realtobits(50.0), "daxpy 2");
    // (3) special values
    t(64'h7ff0_0000_0000_0000, 64'd0, 64'd0, 64'h7ff8_0000_0000_0000, "inf*0");
    t(64'h7ff0_0000_0000_0000, $realtobits(2.0), 64'hfff0_0000_0000_0000, 64'h7ff8_0000_0000_0000, "inf-inf");
    t(64'h7ff0_0000_0000_0000, $realtobits(-2.0), $realtobits(1.0), 64'hfff0_0000_0000_0000, "-inf");
    t($realtobits(1.0), $realtobits(1.0), 64'h7ff0_0000_0000_0000, 64'h7ff0_0000_0000_0000, "c inf");
    t(64'h7ff4_0000_0000_0000, $realtobits(1.0), $realtobits(1.0), 64'h7ff8_0000_0000_0000, "nan");
    t(64'h8000_0000_0000_0000, $realtobits(1.0), 64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000, "-0 + -0");
    t($realtobits(1.0), $realtobits(1.0), $realtobits(-1.0), 64'h0, "exact zero is +0");
    t(64'h7fe0_0000_0000_0000, $realtobits(4.0), 64'd0, 64'h7ff0_0000_0000_0000, "overflow");
    t(64'h0010_0000_0000_0000, $realtobits(0.25), 64'd0, 64'h0004_0000_0000_0000, "to subnormal");
    t(64'h0000_0000_0000_0003, $realtobits(0.5), 64'd0, 64'h0000_0000_0000_0002, "subnormal ties to even");
    t(64'h0000_0000_0000_0001, $realtobits(3.0), 64'h0000_0000_0000_0001, 64'h0000_0000_0000_0004, "subnormal inputs");
    t($realtobits(1.0), $realtobits(1.5), $realtobits(-1.0e-300), $realtobits(1.5), "tiny addend rounds to nearest");
    // (1) exact products
    for (int i = 0; i < 20000; i++) begin
      logic [63:0] x, y, z;
      x = rshort(25, 700, 1300);
      y = rshort(25, 700, 1300);
      case (i % 4)
        0: z = rfull(1, 2046);
        1: z = rfull(int'(x[62:52]) + int'(y[62:52]) - 1023 - 60, int'(x[62:52]) + int'(y[62:52]) - 1023 + 3);
        2: z = {~(x[63] ^ y[63]), 11'(int'(x[62:52]) + int'(y[62:52]) - 1023), 20'($urandom), $urandom};
        default: z = 64'd0;
      endcase
      ra = $bitstoreal(x); rb = $bitstoreal(y); rc = $bitstoreal(z);
      t(x, y, z, $realtobits(ra * rb + rc), "exact product");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
