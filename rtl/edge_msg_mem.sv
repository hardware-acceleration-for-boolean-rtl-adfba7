// edge_msg_mem -- buffer of the clause-to-literal messages of the last
// iteration.
//
// Word c holds the K messages a that clause c sent to its literals in the
// previous sweep. During a sweep the engine reads a clause's old messages,
// uses them to form the literals' extrinsic q messages, and writes the new
// messages back to the same word one cycle later, so every new message
// depends only on the previous iteration's values. Synchronous read (one
// cycle latency), one write port; a read and a write of the same word in the
// same cycle return the old word. Organisation and latency are this design's
// choices.
module edge_msg_mem
  import bpsat_pkg::*;
#(
  parameter int NC = 1065,
  parameter int K  = 3,
  localparam int AW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output msg_t          rdata [K],
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  msg_t          wdata [K]
);

  msg_t mem [NC][K];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
