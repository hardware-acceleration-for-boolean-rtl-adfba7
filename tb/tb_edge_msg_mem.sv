// tb_edge_msg_mem -- self-checking test of the message buffer: random messages are
// written, read back in random order with one cycle of latency, the output
// must hold while re is low, and a write while reading returns the old word.
module tb_edge_msg_mem;
  import bpsat_pkg::*;

  localparam int NC = 37, K = 3, AW = $clog2(NC);
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  msg_t wdata [K];
  msg_t rdata [K];
  msg_t model [NC][K];
  int checks = 0, failures = 0;

  edge_msg_mem #(.NC(NC), .K(K)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(int addr);
    for (int k = 0; k < K; k++) begin
      checks++;
      if (rdata[k] !== model[addr][k]) begin
        failures++;
        $display("FAIL addr %0d lit %0d got %h exp %h", addr, k, rdata[k], model[addr][k]);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < K; k++) wdata[k] = '0;
    // fill
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      we = 1; waddr = AW'(c);
      for (int k = 0; k < K; k++) begin
        wdata[k] = msg_t'($urandom);
        model[c][k] = wdata[k];
      end
    end
    @(negedge clk); we = 0;
    // random reads
    for (int i = 0; i < 300; i++) begin
      automatic int c = int'($urandom_range(0, NC - 1));
      @(negedge clk); re = 1; raddr = AW'(c);
      @(negedge clk); re = 0;
      compare(c);
      @(negedge clk);        // held with re low
      compare(c);
    end
    // read and overwrite the same word in one cycle: old word comes out
    begin
      msg_t old [K];
      old = model[5];
      @(negedge clk); re = 1; raddr = 5; we = 1; waddr = 5;
      for (int k = 0; k < K; k++) wdata[k] = ~old[k];
      @(negedge clk); re = 0; we = 0;
      for (int k = 0; k < K; k++) model[5][k] = old[k];
      compare(5);
      for (int k = 0; k < K; k++) model[5][k] = ~old[k];
      @(negedge clk); re = 1; raddr = 5;
      @(negedge clk); re = 0;
      compare(5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
