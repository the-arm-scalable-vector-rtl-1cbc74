// Self-checking test of the horizontal reductions eorv, orv, andv and uaddv
// with random predicates, element sizes and vector lengths, against a
// reference fold over the active elements.  Includes the paper's
// linked-list case: eorv of 64-bit elements.
module tb_sve_reduce;
  import sve_pkg::*;
  localparam int LEN_MAX = 4;
  localparam int VB = LEN_MAX * 128;
  localparam int PB = LEN_MAX * 16;
  sve_op_e       op;
  esz_e          esz;
  logic [4:0]    eff_len;
  logic [PB-1:0] pg_v;
  logic [VB-1:0] zn_v;
  logic          xd_we;
  logic [63:0]   xd;
  int checks = 0, failures = 0;

  sve_reduce #(.LEN_MAX(LEN_MAX)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sve_op_e ops [4] = '{OP_EORV, OP_ORV, OP_ANDV, OP_UADDV};
    for (int t = 0; t < 3000; t++) begin
      int w, n;
      logic [63:0] m, e, v;
      op = ops[$urandom % 4];
      esz = (t < 50) ? ESZ_D : esz_e'($urandom % 4);
      eff_len = 5'(1 + $urandom % LEN_MAX);
      pg_v = {$urandom, $urandom};
      if (t % 7 == 0) pg_v = '1;
      for (int i = 0; i < VB / 32; i++) zn_v[i*32 +: 32] = $urandom;
      if (t % 5 == 0) zn_v = ~(zn_v & {VB/32{$urandom}});
      w = 8 << int'(esz); n = (int'(eff_len) * 16 * 8) / w;
      m = (w == 64) ? '1 : (64'd1 << w) - 1;
      e = (op == OP_ANDV) ? m : 0;
      for (int i = 0; i < n; i++) if (pg_v[i * w / 8]) begin
        v = 64'(zn_v >> (i*w)) & m;
        unique case (op)
          OP_EORV: e ^= v;
          OP_ORV:  e |= v;
          OP_ANDV: e &= v;
          default: e += v;
        endcase
      end
      #1;
      checks++;
      if (!xd_we || xd !== e) begin
        failures++;
        $display("FAIL op=%s esz=%0d len=%0d xd=%h exp=%h", op.name(), esz, eff_len, xd, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
