// Self-checking test of the predicate condition flags (N = first active
// element true, Z = no active element true, C = last active element not
// true, V = 0) with random governing predicates and results, including an
// empty governing predicate.  The reference scans the elements in order.
module tb_sve_pred_flags;
  import sve_pkg::*;
  localparam int LEN_MAX = 2;
  localparam int PB = LEN_MAX * 16;
  logic [PB-1:0] gov, res;
  nzcv_t         flags;
  int checks = 0, failures = 0;

  sve_pred_flags #(.LEN_MAX(LEN_MAX)) dut (.gov, .res, .flags);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int first, last;
      logic en, ez, ec;
      gov = (t == 0) ? '0 : PB'($urandom & $urandom);
      res = PB'($urandom);
      #1;
      first = -1; last = -1;
      for (int i = 0; i < PB; i++) if (gov[i]) begin
        if (first < 0) first = i;
        last = i;
      end
      en = (first >= 0) && res[first];
      ec = !((last >= 0) && res[last]);
      ez = 1'b1;
      for (int i = 0; i < PB; i++) if (gov[i] && res[i]) ez = 1'b0;
      checks++;
      if (flags.n !== en || flags.z !== ez || flags.c !== ec || flags.v !== 1'b0) begin
        failures++;
        $display("FAIL gov=%h res=%h nzcv=%b exp %b%b%b0", gov, res, flags, en, ez, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
