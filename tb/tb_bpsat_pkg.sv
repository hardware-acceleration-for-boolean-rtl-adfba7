// tb_bpsat_pkg -- checks the two look-up tables of the package against the
// functions they sample, computed here in real arithmetic: every softplus
// correction entry k must be round(16 ln(1 + e^(-k/16))) and every clause
// penalty entry k >= 1 round(-16 ln(1 - e^(-k/16))), clipped to 255; entry
// 0 of the penalty table must be saturated. The table sizes and the to_msg
// rounding and clipping are checked too.
module tb_bpsat_pkg;
  import bpsat_pkg::*;

  int checks = 0, failures = 0;

  task automatic cmp(string what, int k, int got, real exp_real);
    int e;
    e = (exp_real >= 255.0) ? 255 : int'($floor(exp_real + 0.5));
    checks++;
    if (got != e) begin
      failures++;
      $display("FAIL %s[%0d] = %0d, expected %0d", what, k, got, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < SP_ENTRIES; k++)
      cmp("SP_TAB", k, int'(SP_TAB[k]), 16.0 * $ln(1.0 + $exp(-real'(k) / 16.0)));
    cmp("CP_TAB", 0, int'(CP_TAB[0]), 1.0e9);
    for (int k = 1; k < CP_ENTRIES; k++)
      cmp("CP_TAB", k, int'(CP_TAB[k]), -16.0 * $ln(1.0 - $exp(-real'(k) / 16.0)));
    cmp("to_msg", 0, int'(to_msg(-1.0)), 0.0);
    cmp("to_msg", 1, int'(to_msg(100.0)), 255.0);
    cmp("to_msg", 2, int'(to_msg(1.0)), 16.0);
    checks++;
    if (SP_ENTRIES != 64 || CP_ENTRIES != 128 || FRAC != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
