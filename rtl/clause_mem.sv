// clause_mem -- storage of the CNF formula, P clauses per word.
//
// Word w holds clauses w*P .. w*P+P-1, each as K literals (variable index and
// negation flag), i.e. the edges of P clause nodes of the clause/variable
// graph. The host writes one clause at a time (waddr = word, wslot = clause
// within the word); the engine reads a whole word, P clauses, per cycle.
// Read is synchronous: rdata shows the word addressed when re was high on the
// previous edge, and holds otherwise; a read and a write of the same word in
// one cycle return the old word. Keeping the formula in a memory loaded at
// run time, and the word organisation, are this design's choices; the
// paper's proposal synthesises each instance into the FPGA.
module clause_mem
  import bpsat_pkg::*;
#(
  parameter int NW = 1065,   // words
  parameter int P  = 1,      // clauses per word
  parameter int K  = 3,      // literals per clause
  localparam int AW = (NW > 1) ? $clog2(NW) : 1,
  localparam int SW = (P > 1) ? $clog2(P) : 1
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  logic [SW-1:0]  wslot,
  input  literal_t       wdata [K],
  input  logic           re,
  input  logic [AW-1:0]  raddr,
  output literal_t       rdata [P][K]
);

  literal_t mem [NW][P][K];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wslot] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
