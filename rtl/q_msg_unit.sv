// q_msg_unit -- literal-to-clause message of one edge ("compute q").
//
// The variable belief lam = ln(Q(1)/Q(0)) sums the messages of every clause
// the variable appears in. The message to one clause must leave that clause's
// own previous message out, so the edge's own contribution (+a_old for a
// positive literal, -a_old for a negated one) is subtracted first; what is
// left is mu = ln(q(1)/q(0)), the log-odds of the algorithm's q for this edge.
// The clause needs the probability that the literal is false,
// u = 1/(1+e^t) with t = mu (positive literal) or -mu (negated literal), and
// gets it as b = -ln u = ln(1+e^t) = max(t,0) + ln(1+e^-|t|). The correction
// term comes from a table of bpsat_pkg; b saturates at the largest code.
//
// Purely combinational. Dropping the prior p_j and taking the product over
// all other clauses follows the paper's modified step 3; the log-domain form,
// the handling of negated literals and the widths are this design's choices.
module q_msg_unit
  import bpsat_pkg::*;
(
  input  llr_t lam,     // current belief of the literal's variable
  input  msg_t a_old,   // this edge's clause message of the last iteration
  input  logic neg,     // literal is negated
  output msg_t b        // -ln P(literal false)
);

  localparam int WT = W_LLR + 2;

  logic signed [WT-1:0] contrib, mu, t, t_abs, sum;
  msg_t corr;

  always_comb begin
    contrib = neg ? -WT'($signed({1'b0, a_old})) : WT'($signed({1'b0, a_old}));
    mu      = WT'(lam) - contrib;
    t       = neg ? -mu : mu;
    t_abs   = (t < 0) ? -t : t;
    corr    = (t_abs < WT'(SP_ENTRIES)) ? SP_TAB[t_abs[$clog2(SP_ENTRIES)-1:0]] : '0;
    sum     = ((t > 0) ? t : '0) + WT'($signed({1'b0, corr}));
    b       = (sum > WT'($signed({1'b0, MSG_MAX}))) ? MSG_MAX : sum[W_MSG-1:0];
  end

endmodule
