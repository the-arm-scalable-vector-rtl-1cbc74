// Self-checking test of the Z register file: random full-width writes,
// 128-bit Advanced SIMD writes (which must clear the upper bits), a write
// collision on both ports, and reads on all four read ports, against a
// reference array.
module tb_sve_zregs;
  localparam int LEN_MAX = 4;
  localparam int VB = LEN_MAX * 128;
  logic          clk = 0, rst_n = 0;
  logic [4:0]    ra [3];
  logic [VB-1:0] rd [3];
  logic          we, v_we;
  logic [4:0]    wa, v_wa, v_ra;
  logic [VB-1:0] wd;
  logic [127:0]  v_wd, v_rd;
  logic [VB-1:0] ref_z [32];
  int checks = 0, failures = 0, zeroings = 0;

  sve_zregs #(.LEN_MAX(LEN_MAX)) dut (.clk, .rst_n, .ra, .rd, .we, .wa, .wd,
                                      .v_we, .v_wa, .v_wd, .v_ra, .v_rd);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [VB-1:0] rnd_vec();
    logic [VB-1:0] v;
    for (int i = 0; i < VB / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    we = 0; v_we = 0; wa = 0; v_wa = 0; wd = '0; v_wd = '0; v_ra = 0;
    for (int p = 0; p < 3; p++) ra[p] = 0;
    for (int i = 0; i < 32; i++) ref_z[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      we   = $urandom % 2;
      wa   = 5'($urandom);
      wd   = rnd_vec();
      v_we = $urandom % 3 == 0;
      v_wa = (t % 50 == 7) ? wa : 5'($urandom);
      v_wd = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      #1;
      if (v_we && !(we && wa == v_wa)) begin
        ref_z[v_wa] = VB'(v_wd);
        zeroings++;
      end
      if (we) ref_z[wa] = wd;
      we = 0; v_we = 0;
      for (int p = 0; p < 3; p++) ra[p] = 5'($urandom);
      v_ra = 5'($urandom);
      #1;
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (rd[p] !== ref_z[ra[p]]) begin failures++; $display("FAIL read Z%0d", ra[p]); end
      end
      checks++;
      if (v_rd !== ref_z[v_ra][127:0]) begin failures++; $display("FAIL read V%0d", v_ra); end
    end
    // an Advanced SIMD write must leave zeros above bit 127
    @(negedge clk);
    we = 1; wa = 5'd9; wd = '1;
    @(negedge clk);
    we = 0; v_we = 1; v_wa = 5'd9; v_wd = 128'h1234;
    @(negedge clk);
    v_we = 0; ra[0] = 5'd9;
    #1;
    checks++;
    if (rd[0] !== VB'(128'h1234)) begin failures++; $display("FAIL upper bits not cleared"); end
    checks++;
    if (zeroings == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
