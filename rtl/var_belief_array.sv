// var_belief_array -- the variable nodes: beliefs, their update and the hard
// decisions.
//
// Each variable j keeps two signed log-odds registers:
//   lam_cur[j]  ln(Q_j(1)/Q_j(0)) of the last completed iteration, read by the
//               sweep to form literal-to-clause messages;
//   lam_new[j]  the sum being collected during the current sweep, +a for every
//               clause message on a positive literal of j and -a for a negated
//               one (a clause penalises the value that falsifies its literal).
// commit ends an iteration ("compute Q"): lam_new moves to lam_cur and
// lam_new clears. The hard decision is 1 when lam_cur >= 0, i.e. 0 only if
// Q(0) > Q(1), as in the algorithm's decision rule.
//
// Ports: K combinational read ports (rd_idx -> rd_lam); K accumulate lanes
// taken on acc_en, where lanes naming the same variable are merged into one
// add; an init port that sets one variable's starting belief (and clears its
// accumulator) per cycle. Adds saturate at the W_LLR range. Indices at or
// above NV are ignored. Reset clears everything (all q = 0.5). The double
// buffer reflects the paper's remark that each iteration only needs the
// previous one's values; widths, saturation and merging are this design's.
module var_belief_array
  import bpsat_pkg::*;
#(
  parameter int NV = 250,
  parameter int K  = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  // starting belief of one variable
  input  logic             init_we,
  input  logic [W_IDX-1:0] init_idx,
  input  llr_t             init_val,
  // read ports
  input  logic [W_IDX-1:0] rd_idx [K],
  output llr_t             rd_lam [K],
  // accumulation of clause messages
  input  logic             acc_en,
  input  logic [W_IDX-1:0] acc_idx [K],
  input  llr_t             acc_val [K],
  // end of iteration
  input  logic             commit,
  output logic [NV-1:0]    decision
);

  localparam int VW = (NV > 1) ? $clog2(NV) : 1;

  localparam llr_t LLR_MAX = {1'b0, {(W_LLR-1){1'b1}}};
  localparam llr_t LLR_MIN = {1'b1, {(W_LLR-1){1'b0}}};

  llr_t lam_cur [NV];
  llr_t lam_new [NV];

  function automatic llr_t sat_add(llr_t x, llr_t y);
    logic signed [W_LLR:0] s;
    s = (W_LLR+1)'(x) + (W_LLR+1)'(y);
    if (s > (W_LLR+1)'(LLR_MAX)) return LLR_MAX;
    if (s < (W_LLR+1)'(LLR_MIN)) return LLR_MIN;
    return s[W_LLR-1:0];
  endfunction

  // merge lanes that name the same variable; only the first such lane writes
  llr_t merged [K];
  logic first  [K];

  always_comb begin
    for (int k = 0; k < K; k++) begin
      merged[k] = '0;
      first[k]  = 1'b1;
      for (int m = 0; m < K; m++) begin
        if (acc_idx[m] == acc_idx[k]) merged[k] = sat_add(merged[k], acc_val[m]);
        if (m < k && acc_idx[m] == acc_idx[k]) first[k] = 1'b0;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < K; k++)
      rd_lam[k] = (rd_idx[k] < W_IDX'(NV)) ? lam_cur[rd_idx[k][VW-1:0]] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NV; j++) begin
        lam_cur[j] <= '0;
        lam_new[j] <= '0;
      end
    end else if (commit) begin
      for (int j = 0; j < NV; j++) begin
        lam_cur[j] <= lam_new[j];
        lam_new[j] <= '0;
      end
    end else begin
      if (acc_en) begin
        for (int k = 0; k < K; k++)
          if (first[k] && acc_idx[k] < W_IDX'(NV))
            lam_new[acc_idx[k][VW-1:0]] <= sat_add(lam_new[acc_idx[k][VW-1:0]], merged[k]);
      end
      if (init_we && init_idx < W_IDX'(NV)) begin
        lam_cur[init_idx[VW-1:0]] <= init_val;
        lam_new[init_idx[VW-1:0]] <= '0;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < NV; j++) decision[j] = ~lam_cur[j][W_LLR-1];
  end

endmodule
