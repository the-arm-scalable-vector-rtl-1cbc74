// Self-checking test of the scalar-result unit: inc (elements per vector
// times a multiplier, e.g. incd adds VL/64), incp (count of true elements)
// and ctermeq / ctermne with both values of the incoming C flag, against
// reference values computed here.
module tb_sve_count_unit;
  import sve_pkg::*;
  localparam int LEN_MAX = 4;
  localparam int PB = LEN_MAX * 16;
  sve_op_e       op;
  esz_e          esz;
  logic [4:0]    eff_len;
  logic [PB-1:0] pm_v;
  logic [63:0]   xn, xm, imm, xd;
  nzcv_t         flags_in, flags;
  logic          xd_we, flags_we;
  int checks = 0, failures = 0;

  sve_count_unit #(.LEN_MAX(LEN_MAX)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // incd x4 at 128 and 256 bits: +2 and +4 (the paper's daxpy example)
    op = OP_INCP; esz = ESZ_D; pm_v = '0; xm = 0; flags_in = '0;
    op = OP_INC; xn = 0; imm = 1;
    eff_len = 1; #1; checks++; if (xd !== 64'd2 || !xd_we) failures++;
    eff_len = 2; #1; checks++; if (xd !== 64'd4) failures++;
    for (int t = 0; t < 3000; t++) begin
      int n, cnt, sel;
      logic term;
      esz      = esz_e'($urandom % 4);
      eff_len  = 5'(1 + $urandom % LEN_MAX);
      pm_v     = {$urandom, $urandom};
      xn       = {$urandom, $urandom};
      xm       = ($urandom % 2) ? xn : {$urandom, $urandom};
      imm      = 64'(1 + $urandom % 16);
      flags_in = nzcv_t'(4'($urandom));
      n = (int'(eff_len) * 16) >> int'(esz);
      cnt = 0;
      for (int i = 0; i < n; i++) cnt += int'(pm_v[i << int'(esz)]);
      sel = $urandom % 4;
      unique case (sel)
        0: op = OP_INC;
        1: op = OP_INCP;
        2: op = OP_CTERMEQ;
        default: op = OP_CTERMNE;
      endcase
      #1;
      checks++;
      if (op == OP_INC) begin
        if (!xd_we || flags_we || xd !== xn + 64'(n) * imm) begin
          failures++; $display("FAIL inc n=%0d xd=%h", n, xd);
        end
      end else if (op == OP_INCP) begin
        if (!xd_we || flags_we || xd !== xn + 64'(cnt)) begin
          failures++; $display("FAIL incp cnt=%0d xd=%h", cnt, xd);
        end
      end else begin
        term = (op == OP_CTERMEQ) ? (xn == xm) : (xn != xm);
        // continue (N == V) only when neither term nor last (C = 0)
        if (xd_we || !flags_we || flags.z !== flags_in.z || flags.c !== flags_in.c ||
            flags.n !== term || ((flags.n == flags.v) !== (!term && flags_in.c))) begin
          failures++; $display("FAIL cterm term=%0d c=%0d flags=%b", term, flags_in.c, flags);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
