// tb_clause_node_unit -- self-checking test of the clause-to-literal unit.
// For random literal penalties b, each output must be -ln(1 - e^-B) with B
// the sum of the other literals' penalties (saturated when B = 0), computed
// here in real arithmetic and compared within one LSB.
module tb_clause_node_unit;
  import bpsat_pkg::*;

  localparam int K = 3;
  msg_t b [K];
  msg_t a [K];
  int   checks = 0, failures = 0;

  clause_node_unit #(.K(K)) dut (.b, .a);

  function automatic real expect_a(int bsum);
    real y;
    if (bsum == 0) return 255.0;
    y = -$ln(1.0 - $exp(-real'(bsum) / 16.0)) * 16.0;
    return (y > 255.0) ? 255.0 : y;
  endfunction

  task automatic apply(int b0, int b1, int b2);
    int bs [K];
    real e, d;
    bs[0] = b0; bs[1] = b1; bs[2] = b2;
    for (int k = 0; k < K; k++) b[k] = msg_t'(bs[k]);
    #1;
    for (int k = 0; k < K; k++) begin
      automatic int s = 0;
      for (int m = 0; m < K; m++) if (m != k) s += bs[m];
      e = expect_a(s);
      d = real'(a[k]) - e;
      checks++;
      if (d > 1.0 || d < -1.0) begin
        failures++;
        $display("FAIL b=%0d,%0d,%0d lane %0d a=%0d expected %f", b0, b1, b2, k, a[k], e);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(11, 11, 11);   // all q = 0.5: r = 3/4
    apply(0, 0, 40);     // two literals surely false: third is forced
    apply(255, 255, 255);
    apply(0, 0, 0);
    for (int i = 0; i < 3000; i++)
      apply(int'($urandom_range(0, 80)), int'($urandom_range(0, 80)), int'($urandom_range(0, 255)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
