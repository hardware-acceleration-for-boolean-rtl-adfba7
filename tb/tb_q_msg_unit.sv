// tb_q_msg_unit -- self-checking test of the literal-to-clause message unit.
// Random beliefs, old messages and literal signs are applied; the expected
// penalty -ln P(literal false) = ln(1 + e^t) is computed in real arithmetic
// from the extrinsic log-odds and compared within one LSB (table rounding).
module tb_q_msg_unit;
  import bpsat_pkg::*;

  llr_t lam;
  msg_t a_old, b;
  logic neg;
  int   checks = 0, failures = 0;

  q_msg_unit dut (.lam, .a_old, .neg, .b);

  function automatic real expect_b(int l, int a, bit n);
    real mu, t, y;
    mu = real'(l - (n ? -a : a)) / 16.0;
    t  = n ? -mu : mu;
    y  = (t > 30.0) ? t : $ln(1.0 + $exp(t));
    y  = y * 16.0;
    return (y > 255.0) ? 255.0 : y;
  endfunction

  task automatic apply(int l, int a, bit n);
    real e, d;
    lam = llr_t'(l); a_old = msg_t'(a); neg = n;
    #1;
    e = expect_b(l, a, n);
    d = real'(b) - e;
    checks++;
    if (d > 1.0 || d < -1.0) begin
      failures++;
      $display("FAIL lam=%0d a=%0d neg=%0b b=%0d expected %f", l, a, n, b, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // q = 0.5 with no old message: b = ln 2 = 11.09 LSB
    apply(0, 0, 0);
    apply(0, 0, 1);
    // large beliefs saturate, strongly false literal
    apply(30000, 0, 0);
    apply(-30000, 0, 1);
    apply(-30000, 0, 0);
    apply(30000, 0, 1);
    for (int i = 0; i < 3000; i++)
      apply(int'($urandom_range(0, 1200)) - 600, int'($urandom_range(0, 255)), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
