// tb_restart_lfsr -- self-checking test of the random-restart source: after a
// seed load, every step must match a reference xorshift32 sequence, the
// output must be the sign-extended low 6 bits, hold without step, and a zero
// seed must not lock the generator.
module tb_restart_lfsr;
  import bpsat_pkg::*;

  logic clk = 0, rst_n = 0, seed_load = 0, step = 0;
  logic [31:0] seed = '0;
  llr_t rand_llr;
  logic [31:0] ref_state;
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0;

  restart_lfsr #(.INIT_BITS(6)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  task automatic compare();
    int e;
    e = int'(ref_state[5:0]);
    if (e >= 32) e -= 64;
    checks++;
    if (e < 0) n_neg++; else n_pos++;
    if (int'(rand_llr) != e) begin
      failures++;
      $display("FAIL got %0d exp %0d", rand_llr, e);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); seed_load = 1; seed = 32'hDEAD_BEEF;
    @(negedge clk); seed_load = 0; ref_state = 32'hDEAD_BEEF;
    for (int i = 0; i < 2000; i++) begin
      compare();
      step = 1'($urandom);
      @(negedge clk);
      if (step) ref_state = xs(ref_state);
    end
    step = 0;
    @(negedge clk); seed_load = 1; seed = '0;
    @(negedge clk); seed_load = 0;
    checks++;
    if (dut.state == '0) begin failures++; $display("FAIL zero seed locked"); end
    ref_state = dut.state;
    step = 1;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      ref_state = xs(ref_state);
      compare();
    end
    checks++;
    if (n_neg == 0 || n_pos == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
