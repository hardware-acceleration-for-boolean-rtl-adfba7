// tb_bpsat_top_par -- the end-to-end test of tb_bpsat_top repeated on an
// engine that processes four clauses per cycle (P = 4): same formulas, same
// checks and mechanism counts, with the cycle model counting words of four
// clauses. Lanes of different clauses in one word that name the same
// variable must be merged, which this configuration exercises heavily.
module tb_bpsat_top_par;
  import bpsat_pkg::*;

  localparam int NV = 250, NC = 1065, K = 3, P = 4, AW = $clog2(NC);

  logic clk = 0, rst_n = 0;
  logic load_we = 0;
  logic [AW-1:0] load_addr = '0;
  literal_t load_lits [K];
  logic [W_IDX-1:0] cfg_num_vars = '0;
  logic [AW:0] cfg_num_clauses = '0;
  logic [15:0] cfg_max_iter = '0, cfg_max_restart = '0;
  logic [31:0] seed = '0;
  logic start = 0;
  logic busy, done, found;
  logic [NV-1:0] solution;
  logic [15:0] iter_count, restart_count;

  bpsat_top #(.P(P)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cl_idx [NC][K];
  bit cl_neg [NC][K];
  bit planted [NV];
  int cur_nv, cur_nc;

  // mechanism counters
  int m_found = 0, m_notfound = 0, m_restart = 0, m_restart_found = 0;
  int m_early = 0, m_merge = 0, n_upd = 0;

  always @(posedge clk) begin
    if (dut.u_ctrl.chk_valid && !dut.chk_sat && int'(dut.u_ctrl.chk_addr) < nwords() - 1) m_early++;
    if (dut.upd_valid) begin
      n_upd++;
      for (int x = 0; x < P * K; x++)
        for (int y = 0; y < x; y++)
          if (dut.v_idx[x] == dut.v_idx[y]) m_merge++;
    end
  end

  function automatic int nwords();
    return (cur_nc + P - 1) / P;
  endfunction

  // cycle model (P clauses per cycle): per attempt cfg_num_vars init cycles; per iteration n+2
  // words of P clauses w = ceil(n/P): per iteration w+2 (sweep, sweep end,
  // commit) plus the check, which ends at the word of the first false clause
  // f after f/P+2 cycles or passes all words after w+1
  int busy_cycles = 0, exp_cycles = 0;
  bit pend = 0;
  always @(posedge clk) begin
    if (busy) busy_cycles++;
    if (dut.init_we && dut.init_idx == '0) exp_cycles += cur_nv;
    pend <= dut.commit;
  end
  always @(negedge clk) begin
    if (pend) begin
      automatic int ff = -1;
      for (int c = 0; c < cur_nc && ff < 0; c++) begin
        automatic bit s = 0;
        for (int k = 0; k < K; k++) if (solution[cl_idx[c][k]] != cl_neg[c][k]) s = 1;
        if (!s) ff = c;
      end
      exp_cycles += nwords() + 2 + ((ff >= 0) ? ff / P + 2 : nwords() + 1);
    end
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // planted random 3-SAT; with dup set, clause 0 repeats a variable
  task automatic make_planted(int nv, int nc, bit dup);
    cur_nv = nv; cur_nc = nc;
    for (int j = 0; j < nv; j++) planted[j] = 1'($urandom);
    for (int c = 0; c < nc; c++) begin
      automatic bit ok = 0;
      while (!ok) begin
        cl_idx[c][0] = int'($urandom_range(0, nv - 1));
        do cl_idx[c][1] = int'($urandom_range(0, nv - 1)); while (cl_idx[c][1] == cl_idx[c][0]);
        do cl_idx[c][2] = int'($urandom_range(0, nv - 1));
        while (cl_idx[c][2] == cl_idx[c][0] || cl_idx[c][2] == cl_idx[c][1]);
        if (dup && c == 0) cl_idx[c][1] = cl_idx[c][0];
        for (int k = 0; k < K; k++) begin
          cl_neg[c][k] = 1'($urandom);
          if (planted[cl_idx[c][k]] != cl_neg[c][k]) ok = 1;
        end
      end
    end
  endtask

  // unsatisfiable: all eight sign patterns over variables 0, 1, 2
  task automatic make_unsat();
    cur_nv = 3; cur_nc = 8;
    for (int c = 0; c < 8; c++)
      for (int k = 0; k < K; k++) begin
        cl_idx[c][k] = k;
        cl_neg[c][k] = c[k];
      end
  endtask

  task automatic load();
    for (int c = 0; c < cur_nc; c++) begin
      @(negedge clk);
      load_we = 1; load_addr = AW'(c);
      for (int k = 0; k < K; k++) begin
        load_lits[k].idx = W_IDX'(cl_idx[c][k]);
        load_lits[k].neg = cl_neg[c][k];
      end
    end
    @(negedge clk); load_we = 0;
  endtask

  function automatic bit formula_true();
    for (int c = 0; c < cur_nc; c++) begin
      automatic bit s = 0;
      for (int k = 0; k < K; k++) if (solution[cl_idx[c][k]] != cl_neg[c][k]) s = 1;
      if (!s) return 0;
    end
    return 1;
  endfunction

  task automatic run_solver(int mi, int mr, int sd, output bit f);
    int u0, iters;
    cfg_num_vars = W_IDX'(cur_nv); cfg_num_clauses = (AW+1)'(cur_nc);
    cfg_max_iter = 16'(mi); cfg_max_restart = 16'(mr); seed = 32'(sd);
    u0 = n_upd;
    busy_cycles = 0; exp_cycles = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    f = found;
    iters = int'(restart_count) * mi + int'(iter_count);
    check("updates = iterations x words", (n_upd - u0) == iters * nwords());
    check("busy cycles match the cycle model", busy_cycles == exp_cycles);
    if (busy_cycles != exp_cycles) $display("  busy %0d expected %0d", busy_cycles, exp_cycles);
    if (found) begin
      m_found++;
      if (restart_count != 0) m_restart_found++;
      check("reported solution satisfies the formula", formula_true());
    end else begin
      m_notfound++;
      check("not found only at the limits", iter_count == 16'(mi) && restart_count == 16'(mr));
    end
    if (restart_count != 0) m_restart++;
    $display("n=%0d m=%0d found=%0b restarts=%0d iterations=%0d",
             cur_nv, cur_nc, found, restart_count, iter_count);
  endtask

  initial begin
    bit f;
    for (int k = 0; k < K; k++) load_lits[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // easy planted formula (ratio 3), one clause repeats a variable
    make_planted(20, 60, 1); load();
    run_solver(50, 3, 1, f);
    check("easy planted formula solved", f);
    // uf20-91-sized planted formulas
    for (int i = 0; i < 6; i++) begin
      make_planted(20, 91, 0); load();
      run_solver(40, 8, 100 + i, f);
    end
    // short iteration limit forces restarts
    for (int i = 0; i < 4; i++) begin
      make_planted(20, 91, 0); load();
      run_solver(3, 30, 7 + i, f);
    end
    // uf50-218-sized planted formula
    make_planted(50, 218, 0); load();
    run_solver(60, 4, 55, f);
    // unsatisfiable formula
    make_unsat(); load();
    run_solver(5, 2, 3, f);
    check("unsatisfiable formula not found", !f);
    check("mechanism: solution found", m_found > 0);
    check("mechanism: not found at restart limit", m_notfound > 0);
    check("mechanism: random restart", m_restart > 0);
    check("mechanism: found after a restart", m_restart_found > 0);
    check("mechanism: early end of check", m_early > 0);
    check("mechanism: merged duplicate lanes", m_merge > 0);
    $display("mechanisms: found=%0d notfound=%0d restart=%0d restart_found=%0d early=%0d merge=%0d",
             m_found, m_notfound, m_restart, m_restart_found, m_early, m_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
