// tb_var_belief_array -- self-checking test of the variable nodes. A model of
// both belief registers per variable follows random init writes, accumulate
// cycles (including lanes that repeat a variable and indices out of range)
// and commits; read ports and hard decisions are compared every cycle.
module tb_var_belief_array;
  import bpsat_pkg::*;

  localparam int NV = 20, K = 3;
  logic clk = 0, rst_n = 0;
  logic init_we = 0, acc_en = 0, commit = 0;
  logic [W_IDX-1:0] init_idx = '0;
  llr_t init_val = '0;
  logic [W_IDX-1:0] rd_idx [K];
  llr_t rd_lam [K];
  logic [W_IDX-1:0] acc_idx [K];
  llr_t acc_val [K];
  logic [NV-1:0] decision;
  int checks = 0, failures = 0;
  int cur [NV], nw [NV];
  int n_dup = 0, n_sat = 0;

  var_belief_array #(.NV(NV), .K(K)) dut (.*);

  always #5 clk = ~clk;

  function automatic int clip(int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int k = 0; k < K; k++) begin
      int idx = int'(rd_idx[k]);
      int e = (idx < NV) ? cur[idx] : 0;
      checks++;
      if (int'(rd_lam[k]) != e) begin
        failures++;
        $display("FAIL read %0d got %0d exp %0d", idx, rd_lam[k], e);
      end
    end
    for (int j = 0; j < NV; j++) begin
      checks++;
      if (decision[j] !== (cur[j] >= 0)) begin
        failures++;
        $display("FAIL decision %0d", j);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < K; k++) begin rd_idx[k] = '0; acc_idx[k] = '0; acc_val[k] = '0; end
    for (int j = 0; j < NV; j++) begin cur[j] = 0; nw[j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int op;
      @(negedge clk);
      check_all();
      op = int'($urandom_range(0, 99));
      init_we = 0; acc_en = 0; commit = 0;
      for (int k = 0; k < K; k++) rd_idx[k] = W_IDX'($urandom_range(0, NV + 2));
      if (op < 10) begin
        init_we = 1; init_idx = W_IDX'($urandom_range(0, NV));
        init_val = llr_t'(int'($urandom_range(0, 64)) - 32);
        if (init_idx < NV) begin cur[init_idx] = int'(init_val); nw[init_idx] = 0; end
      end else if (op < 15) begin
        commit = 1;
        for (int j = 0; j < NV; j++) begin cur[j] = nw[j]; nw[j] = 0; end
      end else begin
        acc_en = 1;
        for (int k = 0; k < K; k++) begin
          acc_idx[k] = W_IDX'($urandom_range(0, (op < 30) ? 3 : NV + 1));
          acc_val[k] = (op > 95) ? llr_t'(($urandom & 1) ? 30000 : -30000)
                                 : llr_t'(int'($urandom_range(0, 510)) - 255);
        end
        if (acc_idx[0] == acc_idx[1] || acc_idx[0] == acc_idx[2] || acc_idx[1] == acc_idx[2]) n_dup++;
        // model: lanes naming one variable are summed, then added once
        for (int k = 0; k < K; k++) begin
          automatic bit first = 1;
          automatic int m_sum = 0;
          for (int m = 0; m < k; m++) if (acc_idx[m] == acc_idx[k]) first = 0;
          for (int m = 0; m < K; m++) if (acc_idx[m] == acc_idx[k]) m_sum = clip(m_sum + int'(acc_val[m]));
          if (first && acc_idx[k] < NV) begin
            automatic int s = nw[acc_idx[k]] + m_sum;
            if (s != clip(s)) n_sat++;
            nw[acc_idx[k]] = clip(s);
          end
        end
      end
    end
    @(negedge clk);
    init_we = 0; acc_en = 0; commit = 0;
    check_all();
    checks++;
    if (n_dup == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL coverage dup=%0d sat=%0d", n_dup, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
