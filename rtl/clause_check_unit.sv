// clause_check_unit -- evaluates one clause under the current hard decisions.
//
// sat is 1 when at least one of the K literals is true: a positive literal
// whose variable is decided 1 or a negated literal whose variable is decided
// 0. A literal naming a variable at or above NV counts as false. The engine
// applies it to every clause in turn to answer "is the formula satisfied?"
// (the algorithm's stopping test). Purely combinational.
module clause_check_unit
  import bpsat_pkg::*;
#(
  parameter int NV = 250,
  parameter int K  = 3
) (
  input  literal_t      lits [K],
  input  logic [NV-1:0] decision,
  output logic          sat
);

  localparam int VW = (NV > 1) ? $clog2(NV) : 1;

  always_comb begin
    sat = 1'b0;
    for (int k = 0; k < K; k++)
      if (lits[k].idx < W_IDX'(NV))
        sat |= decision[lits[k].idx[VW-1:0]] ^ lits[k].neg;
  end

endmodule
