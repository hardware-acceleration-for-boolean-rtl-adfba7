// tb_clause_mem -- self-checking test of the clause store with two clauses
// per word: random clauses are written one slot at a time, words are read
// back in random order with one cycle of latency, the output must hold while
// re is low, and a write while reading the same word returns the old word.
module tb_clause_mem;
  import bpsat_pkg::*;

  localparam int NW = 19, P = 2, K = 3, AW = $clog2(NW), SW = 1;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [SW-1:0] wslot = '0;
  literal_t wdata [K];
  literal_t rdata [P][K];
  literal_t model [NW][P][K];
  int checks = 0, failures = 0;

  clause_mem #(.NW(NW), .P(P), .K(K)) dut (.clk, .we, .waddr, .wslot, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(int addr);
    for (int p = 0; p < P; p++)
      for (int k = 0; k < K; k++) begin
        checks++;
        if (rdata[p][k] !== model[addr][p][k]) begin
          failures++;
          $display("FAIL word %0d slot %0d lit %0d got %h exp %h", addr, p, k,
                   rdata[p][k], model[addr][p][k]);
        end
      end
  endtask

  task automatic write_clause(int w, int p, bit invert);
    @(negedge clk);
    we = 1; waddr = AW'(w); wslot = SW'(p);
    for (int k = 0; k < K; k++) begin
      wdata[k] = invert ? ~model[w][p][k] : literal_t'({1'($urandom), 16'($urandom)});
      model[w][p][k] = wdata[k];
    end
  endtask

  initial begin
    for (int k = 0; k < K; k++) wdata[k] = '0;
    // fill, slot 1 before slot 0 so a slot mix-up shows
    for (int w = 0; w < NW; w++) begin
      write_clause(w, 1, 0);
      write_clause(w, 0, 0);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      automatic int w = int'($urandom_range(0, NW - 1));
      @(negedge clk); re = 1; raddr = AW'(w);
      @(negedge clk); re = 0;
      compare(w);
      @(negedge clk);        // held with re low
      compare(w);
    end
    // read and overwrite one slot of the same word in one cycle
    begin
      literal_t old [P][K];
      old = model[5];
      write_clause(5, 1, 1);
      re = 1; raddr = 5;
      @(negedge clk); re = 0; we = 0;
      model[5][1] = old[1];
      compare(5);
      for (int k = 0; k < K; k++) model[5][1][k] = ~old[1][k];
      @(negedge clk); re = 1; raddr = 5;
      @(negedge clk); re = 0;
      compare(5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
