// tb_bpsat_workloads -- the benchmark sizes of the uf (uniform random 3-SAT)
// family at the engine's default size: 20/91, 50/218, 75/325, 100/430,
// 125/538, 150/645, 175/753, 200/860, 225/960 and 250/1065 variables/clauses.
// The original benchmark files are not reproduced; instead each size gets
// random formulas with a planted solution generated here (planted formulas
// tend to be easier than the filtered uniform ones). Every "found" answer is
// checked clause by clause, every "not found" answer must sit at the limits.
// Each formula is run without restart and then with up to two restarts, as
// the completeness is compared with and without the restart mechanism; the
// per-size solve rates and the mean iteration count are printed.
module tb_bpsat_workloads;
  import bpsat_pkg::*;

  localparam int NV = 250, NC = 1065, K = 3, P = 1, AW = $clog2(NC);

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

  bpsat_top dut (.*);

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

  localparam int NSIZE = 10;
  localparam int SZ_V [NSIZE] = '{20, 50, 75, 100, 125, 150, 175, 200, 225, 250};
  localparam int SZ_C [NSIZE] = '{91, 218, 325, 430, 538, 645, 753, 860, 960, 1065};
  localparam int PER_SIZE = 3;

  initial begin
    bit f;
    for (int k = 0; k < K; k++) load_lits[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSIZE; s++) begin
      automatic int nf = 0, it = 0, nf0 = 0;
      for (int i = 0; i < PER_SIZE; i++) begin
        make_planted(SZ_V[s], SZ_C[s], 0); load();
        // without and with the random restart
        run_solver(150, 0, 1000 * s + i + 1, f);
        if (f) nf0++;
        run_solver(150, 2, 1000 * s + i + 1, f);
        if (f) begin nf++; it += int'(restart_count) * 150 + int'(iter_count); end
      end
      $display("uf%0d-%0d: solved %0d of %0d without restart, %0d with up to 2 restarts, mean iterations of solved %0d",
               SZ_V[s], SZ_C[s], nf0, PER_SIZE, nf, (nf > 0) ? it / nf : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
