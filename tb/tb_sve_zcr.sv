// Self-checking test of the ZCR_EL1..EL3 vector-length registers: random
// writes from random exception levels against a reference that keeps the
// three LEN fields and computes the effective length as the minimum of the
// implemented length and the requests of the current and higher levels.
module tb_sve_zcr;
  localparam int LEN_MAX = 12;   // a length that is not a power of two
  logic       clk = 0, rst_n = 0;
  logic       we;
  logic [1:0] wel, cur_el;
  logic [3:0] wlen;
  logic [3:0] zcr_len [1:3];
  logic       wr_denied;
  logic [4:0] eff_len;
  int checks = 0, failures = 0;
  int ref_len [4];

  sve_zcr #(.LEN_MAX(LEN_MAX)) dut (.clk, .rst_n, .we, .wel, .wlen, .cur_el,
                                    .zcr_len, .wr_denied, .eff_len);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int exp_len(int el);
    int l = LEN_MAX;
    for (int i = 1; i <= 3; i++)
      if (i >= el && ref_len[i] + 1 < l) l = ref_len[i] + 1;
    return l;
  endfunction

  initial begin
    we = 0; wel = 0; wlen = 0; cur_el = 0;
    for (int i = 1; i <= 3; i++) ref_len[i] = 15;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (eff_len != 5'(LEN_MAX)) begin failures++; $display("FAIL reset eff_len=%0d", eff_len); end
    for (int t = 0; t < 400; t++) begin
      we     = ($urandom % 3) != 0;
      wel    = 2'($urandom);
      wlen   = 4'($urandom);
      cur_el = 2'($urandom);
      #1;
      checks++;
      if (wr_denied != (we && (wel == 0 || cur_el < wel))) begin
        failures++; $display("FAIL denied we=%0d wel=%0d el=%0d", we, wel, cur_el);
      end
      if (we && wel != 0 && cur_el >= wel) ref_len[wel] = int'(wlen);
      @(negedge clk);
      we = 0;
      for (int el = 0; el < 4; el++) begin
        cur_el = 2'(el);
        #1;
        checks++;
        if (int'(eff_len) != exp_len(el)) begin
          failures++;
          $display("FAIL el=%0d eff_len=%0d exp=%0d", el, eff_len, exp_len(el));
        end
      end
      for (int i = 1; i <= 3; i++) begin
        checks++;
        if (int'(zcr_len[i]) != ref_len[i]) begin failures++; $display("FAIL zcr%0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
