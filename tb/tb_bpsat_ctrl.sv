// tb_bpsat_ctrl -- self-checking test of the loop sequencer with a scripted
// clause checker. Three runs: every check fails (the run must end not found
// after (max_restart+1) * max_iter iterations); every check passes (found
// after one iteration); a check that passes only in a chosen iteration of a
// chosen attempt. Per run it counts reads, updates, commits and init writes
// and compares them, the final counters and the cycle count with values
// worked out from the flow: per attempt nv init cycles; per iteration n+1
// sweep cycles, 1 commit, and 2 check cycles when clause 0 fails or n+1 when
// all pass.
module tb_bpsat_ctrl;
  import bpsat_pkg::*;

  localparam int NC = 8, AW = $clog2(NC);
  logic clk = 0, rst_n = 0, start = 0;
  logic [W_IDX-1:0] cfg_num_vars;
  logic [AW:0] cfg_num_clauses;
  logic [15:0] cfg_max_iter, cfg_max_restart;
  logic rd_en, upd_valid, ignore_old, init_we, init_random, seed_load, commit;
  logic chk_valid, chk_sat, busy, done, found;
  logic [AW-1:0] rd_addr, upd_addr;
  logic [W_IDX-1:0] init_idx;
  logic [15:0] iter_count, restart_count;
  int checks = 0, failures = 0;

  bpsat_ctrl #(.NC(NC)) dut (.*);

  always #5 clk = ~clk;

  // scripted checker: pass_attempt/pass_iter select the iteration that passes
  int pass_attempt, pass_iter, attempt_no;
  assign chk_sat = (int'(restart_count) == pass_attempt) && (int'(iter_count) == pass_iter);

  int n_upd, n_commit, n_init, n_chk, n_init_rand, n_ign, cycles;
  always @(posedge clk) begin
    if (busy) cycles++;
    if (upd_valid) n_upd++;
    if (commit) n_commit++;
    if (init_we) n_init++;
    if (init_we && init_random) n_init_rand++;
    if (chk_valid) n_chk++;
    if (upd_valid && ignore_old) n_ign++;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run(int nv, int n, int mi, int mr, int pa, int pi,
                     int e_found, int e_iters_total, int e_restarts, int e_iter, int e_cycles);
    cfg_num_vars = W_IDX'(nv); cfg_num_clauses = (AW+1)'(n);
    cfg_max_iter = 16'(mi); cfg_max_restart = 16'(mr);
    pass_attempt = pa; pass_iter = pi;
    n_upd = 0; n_commit = 0; n_init = 0; n_chk = 0; n_init_rand = 0; n_ign = 0; cycles = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    expect_eq("found", int'(found), e_found);
    expect_eq("commits", n_commit, e_iters_total);
    expect_eq("updates", n_upd, e_iters_total * n);
    expect_eq("init writes", n_init, nv * (e_restarts + 1));
    expect_eq("random init writes", n_init_rand, nv * e_restarts);
    expect_eq("updates ignoring old messages", n_ign, n * (e_restarts + 1));
    expect_eq("restart_count", int'(restart_count), e_restarts);
    expect_eq("iter_count", int'(iter_count), e_iter);
    expect_eq("busy cycles", cycles, e_cycles);
    if (e_found == 1) expect_eq("checks in last iteration >= n", int'(n_chk >= n), 1);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // never satisfied: 3 attempts x 4 iterations, nv=5, n=6
    //   cycles = 3*5 + 12*((6+1) + 1 + 2)
    run(5, 6, 4, 2, -1, -1, 0, 12, 2, 4, 3*5 + 12*10);
    // satisfied at once: 1 iteration, check of all 6 clauses (n+1 cycles)
    run(5, 6, 4, 2, 0, 1, 1, 1, 0, 1, 5 + 7 + 1 + 7);
    // satisfied in iteration 2 of the second attempt (restart 1)
    //   attempt 0: 3 failing iterations; attempt 1: 1 failing + 1 passing
    run(4, 7, 3, 5, 1, 2, 1, 5, 1, 2, 2*4 + 4*(8+1+2) + (8+1+8));
    // all clauses of NC used, max_iter 0 acts as 1, no restarts allowed
    run(3, 8, 0, 0, -1, -1, 0, 1, 0, 1, 3 + 9 + 1 + 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
