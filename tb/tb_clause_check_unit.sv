// tb_clause_check_unit -- self-checking test of the clause evaluator against
// random clauses and assignments, with out-of-range variables counted false.
module tb_clause_check_unit;
  import bpsat_pkg::*;

  localparam int NV = 20, K = 3;
  literal_t lits [K];
  logic [NV-1:0] decision;
  logic sat;
  int checks = 0, failures = 0, n_sat = 0, n_unsat = 0;

  clause_check_unit #(.NV(NV), .K(K)) dut (.lits, .decision, .sat);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      automatic bit e = 0;
      decision = NV'($urandom);
      for (int k = 0; k < K; k++) begin
        lits[k].idx = W_IDX'($urandom_range(0, NV + 1));
        lits[k].neg = 1'($urandom);
        if (lits[k].idx < NV && (decision[lits[k].idx] != lits[k].neg)) e = 1;
      end
      #1;
      checks++;
      if (e) n_sat++; else n_unsat++;
      if (sat !== e) begin
        failures++;
        $display("FAIL got %0b exp %0b", sat, e);
      end
    end
    checks++;
    if (n_sat == 0 || n_unsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
