// bpsat_pkg -- shared types, widths and look-up tables of the BPA-SAT engine.
//
// The engine runs belief propagation on a CNF formula: clauses play the part
// of the check nodes of an LDPC decoder and variables the part of its
// variable nodes. All messages are kept in the log domain, so the products of
// probabilities of the algorithm become sums and the normalisation factors
// (alpha, beta) drop out:
//
//   lam_j  = ln(Q_j(1)/Q_j(0))            variable belief, signed W_LLR bits
//   b_e    = -ln P(literal e is false)    literal-to-clause message (from q)
//   a_e    = -ln r_e                      clause-to-literal message, the
//                                         penalty on the value that falsifies
//                                         the literal (r of the other value is 1)
//
// b and a are unsigned, W_MSG bits with FRAC fraction bits (1/16 nat per LSB),
// and saturate at their largest code. Two nonlinear functions are needed and
// are built here as constant tables at elaboration:
//   softplus correction  c(x) = ln(1 + e^-x),   x = 0 .. 63 LSB
//   clause penalty       f(B) = -ln(1 - e^-B),  B = 0 .. 127 LSB (f(0) saturates)
// Widths and tables are this design's choice; the equations follow the
// modified belief propagation for SAT (prior dropped, OR clauses).
package bpsat_pkg;

  localparam int FRAC   = 4;     // fraction bits of all log-domain values
  localparam int W_MSG  = 8;     // clause/literal message width
  localparam int W_LLR  = 16;    // variable belief width (signed)
  localparam int W_IDX  = 16;    // variable index field of a literal

  localparam int SP_ENTRIES = 64;   // softplus correction table size
  localparam int CP_ENTRIES = 128;  // clause penalty table size

  localparam logic [W_MSG-1:0] MSG_MAX = '1;

  typedef logic [W_MSG-1:0]        msg_t;
  typedef logic signed [W_LLR-1:0] llr_t;

  // One literal of a clause: variable index and negation flag.
  typedef struct packed {
    logic             neg;
    logic [W_IDX-1:0] idx;
  } literal_t;


  typedef msg_t sp_tab_t [SP_ENTRIES];
  typedef msg_t cp_tab_t [CP_ENTRIES];

  function automatic msg_t to_msg(real y);
    real s;
    s = y * real'(1 << FRAC) + 0.5;
    if (s >= real'(MSG_MAX)) return MSG_MAX;
    if (s <= 0.0) return '0;
    return msg_t'(int'($floor(s)));
  endfunction

  // c(x) = ln(1 + e^-x), entry k at x = k/16 nat.
  function automatic sp_tab_t make_sp_tab();
    sp_tab_t t;
    for (int k = 0; k < SP_ENTRIES; k++) begin
      real x;
      x = real'(k) / real'(1 << FRAC);
      t[k] = to_msg($ln(1.0 + $exp(-x)));
    end
    return t;
  endfunction

  // f(B) = -ln(1 - e^-B), entry k at B = k/16 nat; B = 0 is infinite.
  function automatic cp_tab_t make_cp_tab();
    cp_tab_t t;
    t[0] = MSG_MAX;
    for (int k = 1; k < CP_ENTRIES; k++) begin
      real x;
      x = real'(k) / real'(1 << FRAC);
      t[k] = to_msg(-$ln(1.0 - $exp(-x)));
    end
    return t;
  endfunction

  localparam sp_tab_t SP_TAB = make_sp_tab();
  localparam cp_tab_t CP_TAB = make_cp_tab();

endpackage
