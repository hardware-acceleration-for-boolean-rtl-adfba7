// bpsat_top -- belief-propagation SAT solver engine (BPA-SAT).
//
// The engine searches for a satisfying assignment of a CNF formula by running
// the belief propagation of an LDPC decoder on the clause/variable graph:
// clauses take the place of parity checks and send each literal the chance
// that the clause is satisfied without it (r); variables send each clause
// their belief gathered from all other clauses (q); the beliefs of all
// clauses together (Q) give a hard assignment, which is tested against the
// formula after every iteration. A run that does not converge within
// max_iter iterations restarts from random beliefs, up to max_restart times.
//
// Datapath, one word of P clauses per cycle in a two-stage pipeline:
//   stage 1  the word (P clauses of K literals) and its P*K old messages are
//            read from clause_mem and edge_msg_mem;
//   stage 2  P*K q_msg_units turn the variables' beliefs, minus the edge's
//            own old message, into literal-false penalties b; P
//            clause_node_units turn them into new messages a, which are
//            written back to edge_msg_mem and added (+a positive literal, -a
//            negated) into the new beliefs in var_belief_array, whose P*K
//            lanes merge any that name the same variable.
// After the sweep the beliefs are committed, and the check phase reads the
// words again through P clause_check_units. bpsat_ctrl sequences it all in
// units of words; restart_lfsr supplies the random starting beliefs. Slots
// past the formula's last clause are masked (no update, counted satisfied).
//
// Interface: while not busy, the host writes clause c with load_we, load_addr
// = c and load_lits (K literals, variable index 0-based plus negation flag),
// sets cfg_num_vars/cfg_num_clauses to the instance size (up to NV/NC) and
// the two limits, then pulses start (seed is loaded at that moment). When done
// rises, found tells whether solution[NV-1:0] satisfies the formula;
// iter_count and restart_count give the iterations of the last attempt and
// the restarts used. With w = ceil(n/P) words for n clauses, one iteration
// takes w+2 cycles of sweep and commit plus 2 to w+1 of check, and every start
// or restart cfg_num_vars cycles of initialisation.
//
// The algorithm (no prior, random restart, hard-decision test, flow of the
// two loops) follows the paper, as does the idea that all r and q of an
// iteration can be computed in parallel from the previous iteration's values.
// The run-time loadable formula, the word-serial schedule with P clauses in
// parallel (default 1), the log-domain fixed-point arithmetic and all widths
// are this design's choices: the paper proposes a fully parallel,
// instance-specific FPGA circuit but gives no microarchitecture.
module bpsat_top
  import bpsat_pkg::*;
#(
  parameter int NV = 250,
  parameter int NC = 1065,
  parameter int K  = 3,
  parameter int P  = 1,
  localparam int AW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // formula load
  input  logic             load_we,
  input  logic [AW-1:0]    load_addr,
  input  literal_t         load_lits [K],
  // run configuration
  input  logic [W_IDX-1:0] cfg_num_vars,
  input  logic [AW:0]      cfg_num_clauses,
  input  logic [15:0]      cfg_max_iter,
  input  logic [15:0]      cfg_max_restart,
  input  logic [31:0]      seed,
  input  logic             start,
  // result
  output logic             busy,
  output logic             done,
  output logic             found,
  output logic [NV-1:0]    solution,
  output logic [15:0]      iter_count,
  output logic [15:0]      restart_count
);

  localparam int ND = (NC + P - 1) / P;             // words of P clauses
  localparam int DW = (ND > 1) ? $clog2(ND) : 1;
  localparam int SW = (P > 1) ? $clog2(P) : 1;
  localparam int L  = P * K;                        // edge lanes

  logic             rd_en, upd_valid, ignore_old, init_we, init_random;
  logic             seed_load, commit, chk_valid, chk_sat;
  logic [DW-1:0]    rd_addr, upd_addr;
  logic [DW:0]      num_words;
  logic [W_IDX-1:0] init_idx;
  llr_t             rand_llr;

  literal_t         lits    [P][K];
  logic             slot_ok [P];
  logic             cl_sat  [P];
  msg_t             a_rd    [L];
  msg_t             a_old   [L];
  msg_t             b       [L];
  msg_t             a_new   [L];
  logic [W_IDX-1:0] v_idx   [L];
  logic [W_IDX-1:0] acc_idx [L];
  llr_t             lam     [L];
  llr_t             contrib [L];

  assign num_words = (DW+1)'((32'(cfg_num_clauses) + P - 1) / P);

  bpsat_ctrl #(.NC(ND)) u_ctrl (
    .clk, .rst_n, .start,
    .cfg_num_vars, .cfg_num_clauses(num_words), .cfg_max_iter, .cfg_max_restart,
    .rd_en, .rd_addr, .upd_valid, .upd_addr, .ignore_old,
    .init_we, .init_idx, .init_random, .seed_load, .commit,
    .chk_valid, .chk_sat,
    .busy, .done, .found, .iter_count, .restart_count
  );

  clause_mem #(.NW(ND), .P(P), .K(K)) u_clauses (
    .clk,
    .we(load_we && !busy),
    .waddr(DW'(32'(load_addr) / P)), .wslot(SW'(32'(load_addr) % P)),
    .wdata(load_lits),
    .re(rd_en), .raddr(rd_addr), .rdata(lits)
  );

  edge_msg_mem #(.NC(ND), .K(L)) u_msgs (
    .clk,
    .re(rd_en), .raddr(rd_addr), .rdata(a_rd),
    .we(upd_valid), .waddr(upd_addr), .wdata(a_new)
  );

  restart_lfsr u_rng (
    .clk, .rst_n, .seed_load, .seed,
    .step(init_we && init_random), .rand_llr
  );

  // upd_addr is the word read in the previous cycle, in the sweep and in the
  // check alike; slots past the last clause of the formula are masked
  always_comb begin
    for (int p = 0; p < P; p++) begin
      slot_ok[p] = (32'(upd_addr) * P + p) < 32'(cfg_num_clauses);
      for (int k = 0; k < K; k++) begin
        v_idx[p*K+k]   = lits[p][k].idx;
        acc_idx[p*K+k] = slot_ok[p] ? lits[p][k].idx : '1;
        a_old[p*K+k]   = ignore_old ? '0 : a_rd[p*K+k];
        contrib[p*K+k] = lits[p][k].neg ? -llr_t'(a_new[p*K+k]) : llr_t'(a_new[p*K+k]);
      end
    end
  end

  var_belief_array #(.NV(NV), .K(L)) u_vars (
    .clk, .rst_n,
    .init_we, .init_idx, .init_val(init_random ? rand_llr : '0),
    .rd_idx(v_idx), .rd_lam(lam),
    .acc_en(upd_valid), .acc_idx, .acc_val(contrib),
    .commit, .decision(solution)
  );

  for (genvar p = 0; p < P; p++) begin : g_clause
    msg_t b_c [K];
    msg_t a_c [K];
    for (genvar k = 0; k < K; k++) begin : g_lit
      q_msg_unit u_q (.lam(lam[p*K+k]), .a_old(a_old[p*K+k]), .neg(lits[p][k].neg), .b(b[p*K+k]));
      assign b_c[k] = b[p*K+k];
      assign a_new[p*K+k] = a_c[k];
    end
    clause_node_unit #(.K(K)) u_clause (.b(b_c), .a(a_c));
    clause_check_unit #(.NV(NV), .K(K)) u_check (
      .lits(lits[p]), .decision(solution), .sat(cl_sat[p])
    );
  end

  always_comb begin
    chk_sat = 1'b1;
    for (int p = 0; p < P; p++) if (slot_ok[p] && !cl_sat[p]) chk_sat = 1'b0;
  end

  // host rules: the formula and the start pulse are only given while idle
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !load_we);
  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !start);

endmodule
