// bpsat_ctrl -- sequencer of the BPA-SAT loops.
//
// The state machine walks the flow of the algorithm:
//   INIT     "Initialize q": one variable per cycle gets its starting belief,
//            0 (q = 0.5) on the first attempt, random after a restart.
//   SWEEP    "Compute r" and "Compute q": one clause word (one or more
//            clauses, as the datapath is built) per cycle is read
//            (rd_en/rd_addr) and, one cycle later, updated (upd_valid/
//            upd_addr). SWEEP_END lets the last word's update finish.
//   COMMIT   "Compute Q": the new beliefs become current (commit) and the
//            iteration counter advances.
//   CHECK    "SAT?": words are read again one per cycle and tested one cycle
//            later (chk_valid, chk_sat). The first word with an unsatisfied
//            clause ends the test; if all pass the run ends with found = 1.
// After a failed test: fewer than max_iter iterations in this attempt -> SWEEP
// again; otherwise, fewer than max_restart restarts -> random restart (INIT);
// otherwise the run ends with found = 0. ignore_old is high during the first
// sweep of every attempt, when the message buffer still holds stale values.
//
// Timing of one iteration with n words (cfg_num_clauses counts words): n + 1
// cycles of sweep, 1 of commit, and 2 to n + 1 of check. start is taken in
// IDLE or DONE; done stays high until the next start. cfg_* must hold during
// a run; cfg_num_clauses >= 1; NC is the number of words.
// The flow is the paper's; the cycle-level pipeline is this design's choice.
module bpsat_ctrl
  import bpsat_pkg::*;
#(
  parameter int NC = 1065,
  localparam int AW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [W_IDX-1:0] cfg_num_vars,
  input  logic [AW:0]      cfg_num_clauses,
  input  logic [15:0]      cfg_max_iter,
  input  logic [15:0]      cfg_max_restart,
  // clause read (both memories)
  output logic             rd_en,
  output logic [AW-1:0]    rd_addr,
  // sweep update stage
  output logic             upd_valid,
  output logic [AW-1:0]    upd_addr,
  output logic             ignore_old,
  // variable initialisation
  output logic             init_we,
  output logic [W_IDX-1:0] init_idx,
  output logic             init_random,
  output logic             seed_load,
  output logic             commit,
  // check stage
  output logic             chk_valid,
  input  logic             chk_sat,
  // status
  output logic             busy,
  output logic             done,
  output logic             found,
  output logic [15:0]      iter_count,
  output logic [15:0]      restart_count
);

  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_SWEEP, S_SWEEP_END, S_COMMIT, S_CHECK, S_DONE
  } state_t;

  state_t         state;
  logic [AW:0]    cnt;          // word issue counter
  logic [W_IDX:0] vcnt;         // variable init counter
  logic [AW-1:0]  chk_addr;
  logic           chk_fail, chk_last;

  wire [15:0] max_iter = (cfg_max_iter == '0) ? 16'd1 : cfg_max_iter;

  assign busy        = (state != S_IDLE) && (state != S_DONE);
  assign rd_en       = (state == S_SWEEP || state == S_CHECK) && (cnt < cfg_num_clauses);
  assign rd_addr     = cnt[AW-1:0];
  assign init_we     = (state == S_INIT);
  assign init_idx    = vcnt[W_IDX-1:0];
  assign init_random = (restart_count != '0);
  assign seed_load   = start && !busy;
  assign commit      = (state == S_COMMIT);
  assign ignore_old  = (iter_count == '0);
  assign chk_fail    = chk_valid && !chk_sat;
  assign chk_last    = chk_valid && chk_sat && ({1'b0, chk_addr} == cfg_num_clauses - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cnt           <= '0;
      vcnt          <= '0;
      upd_valid     <= 1'b0;
      upd_addr      <= '0;
      chk_valid     <= 1'b0;
      chk_addr      <= '0;
      done          <= 1'b0;
      found         <= 1'b0;
      iter_count    <= '0;
      restart_count <= '0;
    end else begin
      upd_valid <= (state == S_SWEEP) && rd_en;
      upd_addr  <= rd_addr;
      chk_valid <= (state == S_CHECK) && rd_en;
      chk_addr  <= rd_addr;
      if (rd_en) cnt <= cnt + 1'b1;

      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state         <= S_INIT;
            vcnt          <= '0;
            done          <= 1'b0;
            found         <= 1'b0;
            iter_count    <= '0;
            restart_count <= '0;
          end
        end
        S_INIT: begin
          vcnt <= vcnt + 1'b1;
          if (vcnt + 1'b1 >= {1'b0, cfg_num_vars}) begin
            state <= S_SWEEP;
            cnt   <= '0;
          end
        end
        S_SWEEP: begin
          if (cnt + 1'b1 >= cfg_num_clauses) state <= S_SWEEP_END;
        end
        S_SWEEP_END: state <= S_COMMIT;
        S_COMMIT: begin
          iter_count <= iter_count + 1'b1;
          state      <= S_CHECK;
          cnt        <= '0;
        end
        S_CHECK: begin
          if (chk_last) begin
            state <= S_DONE;
            done  <= 1'b1;
            found <= 1'b1;
          end else if (chk_fail) begin
            chk_valid <= 1'b0;
            cnt       <= '0;
            if (iter_count < max_iter) begin
              state <= S_SWEEP;
            end else if (restart_count < cfg_max_restart) begin
              state         <= S_INIT;
              vcnt          <= '0;
              iter_count    <= '0;
              restart_count <= restart_count + 1'b1;
            end else begin
              state <= S_DONE;
              done  <= 1'b1;
              found <= 1'b0;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a clause is only tested after it was read in the check phase
  a_chk_after_read: assert property (@(posedge clk) disable iff (!rst_n)
    chk_valid |-> $past(state == S_CHECK));
  // no update while the beliefs are committed
  a_no_upd_at_commit: assert property (@(posedge clk) disable iff (!rst_n)
    !(commit && upd_valid));

endmodule
