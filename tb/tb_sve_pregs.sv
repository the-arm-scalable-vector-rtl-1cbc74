// Self-checking test of the predicate register file and FFR: random writes
// and reads of P0-P15, FFR writes and FFR clear-masks (FFR &= mask), with
// the priority of a full FFR write over a clear, against a reference model.
module tb_sve_pregs;
  localparam int LEN_MAX = 4;
  localparam int PB = LEN_MAX * 16;
  logic          clk = 0, rst_n = 0;
  logic [3:0]    ra [4];
  logic [PB-1:0] rd [4];
  logic          we, ffr_we, ffr_clr_we;
  logic [3:0]    wa;
  logic [PB-1:0] wd, ffr, ffr_wd, ffr_clr_mask;
  logic [PB-1:0] ref_p [16];
  logic [PB-1:0] ref_ffr;
  int checks = 0, failures = 0;

  sve_pregs #(.LEN_MAX(LEN_MAX)) dut (.clk, .rst_n, .ra, .rd, .we, .wa, .wd, .ffr,
                                      .ffr_we, .ffr_wd, .ffr_clr_we, .ffr_clr_mask);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ffr_we = 0; ffr_clr_we = 0; wa = 0; wd = '0; ffr_wd = '0; ffr_clr_mask = '0;
    for (int p = 0; p < 4; p++) ra[p] = 0;
    for (int i = 0; i < 16; i++) ref_p[i] = '0;
    ref_ffr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      we = $urandom % 2; wa = 4'($urandom); wd = {$urandom, $urandom};
      ffr_we = $urandom % 4 == 0; ffr_wd = {$urandom, $urandom};
      ffr_clr_we = $urandom % 2; ffr_clr_mask = {$urandom, $urandom};
      @(posedge clk);
      #1;
      if (we) ref_p[wa] = wd;
      if (ffr_we) ref_ffr = ffr_wd;
      else if (ffr_clr_we) ref_ffr = ref_ffr & ffr_clr_mask;
      we = 0; ffr_we = 0; ffr_clr_we = 0;
      for (int p = 0; p < 4; p++) ra[p] = 4'($urandom);
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rd[p] !== ref_p[ra[p]]) begin failures++; $display("FAIL read P%0d", ra[p]); end
      end
      checks++;
      if (ffr !== ref_ffr) begin failures++; $display("FAIL ffr %h exp %h", ffr, ref_ffr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
