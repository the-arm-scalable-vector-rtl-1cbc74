// Self-checking test of the instruction-class decoder: every value of the
// top-level field (bits 28:25) and of the SVE sub-group field (bits 31:29,24)
// is tried, with random values in all other bits, against the encoding map
// written out here as a table.
module tb_sve_insn_class;
  logic [31:0] insn;
  logic        is_sve;
  logic [3:0]  a64_group, sve_group;
  int checks = 0, failures = 0;

  sve_insn_class dut (.insn, .is_sve, .a64_group, .sve_group);

  // expected group numbers, in the order of the decoder's enumerations
  // A64: 0 unalloc 1 SVE 2 INT L/S pair/ex 3 INT DP+shift 4 ASIMD L/S
  //      5 ASIMD DP 6 INT DP imm 7 control flow 8 INT L/S 9 INT DP 10 FP L/S 11 FP DP
  int top_exp [16] = '{0, 0, 1, 0, 2, 3, 4, 5, 6, 6, 7, 7, 8, 9, 10, 11};
  // SVE: 0 none 1 unalloc 2 INT DP 3 PERM 4 INT CMP 5 PRED 6 FP DP&CMP
  //      7 gather32 8 contig ld/st 9 gather64 10 scatter
  int sub_exp [16] = '{2, 3, 4, 5, 1, 1, 1, 6, 7, 7, 8, 8, 9, 9, 10, 10};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 16; t++) begin
      for (int s = 0; s < 16; s++) begin
        for (int r = 0; r < 4; r++) begin
          insn = $urandom;
          insn[28:25] = 4'(t);
          {insn[31:29], insn[24]} = 4'(s);
          #1;
          checks++;
          if (int'(a64_group) != top_exp[t] || is_sve != (t == 2) ||
              int'(sve_group) != ((t == 2) ? sub_exp[s] : 0)) begin
            failures++;
            $display("FAIL insn=%h top=%0d sub=%0d got a64=%0d sve=%0d", insn, t, s,
                     a64_group, sve_group);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
