// clause_node_unit -- clause-to-literal messages of one clause ("compute r").
//
// A clause (l_1 or ... or l_K) is satisfied for sure when literal l_k is true.
// When l_k is false it is satisfied with probability
//   r_k = 1 - prod_{k' != k} P(l_k' false) = 1 - e^-B_k,
//   B_k = sum_{k' != k} b_k'.
// The unit outputs a_k = -ln r_k = f(B_k), the penalty that the clause places
// on the value of the variable that falsifies l_k. f comes from the clause
// penalty table of bpsat_pkg: 0 for B_k of 8 nat and more, saturated for
// B_k = 0 (a clause whose other literals are all surely false forces l_k).
// With K = 1 the sum is empty and the single literal is always forced.
//
// Purely combinational; K lanes in parallel. The meaning of r (probability
// that the clause is satisfied given the literal's value) follows the paper's
// definition; the log-domain form and table sizes are this design's choices.
module clause_node_unit
  import bpsat_pkg::*;
#(
  parameter int K = 3
) (
  input  msg_t b [K],   // -ln P(literal false), per literal
  output msg_t a [K]    // -ln r, per literal
);

  localparam int WB = W_MSG + $clog2(K + 1);

  logic [WB-1:0] total;
  logic [WB-1:0] others [K];

  always_comb begin
    total = '0;
    for (int k = 0; k < K; k++) total += WB'(b[k]);
    for (int k = 0; k < K; k++) begin
      others[k] = total - WB'(b[k]);
      a[k] = (others[k] < WB'(CP_ENTRIES)) ? CP_TAB[others[k][$clog2(CP_ENTRIES)-1:0]] : '0;
    end
  end

endmodule
