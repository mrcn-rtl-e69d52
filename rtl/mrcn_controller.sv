// mrcn_controller -- NMP-side sequencer of one offloaded task under MRCN.
//
// Phases of a task (state in brackets):
//   [IDLE]   task_start (the offload macro) opens the task in section 0 and
//            records rollback point 0.
//   [EXEC]   the core runs speculatively; each bp_mark (a breakpoint macro in
//            the task) moves to the next section and records its rollback
//            point. task_end (the end-of-task macro) stops execution.
//   [SEND]   one cycle: the signatures are handed to the link (sig_send) and
//            cleared for the next round (sig_clear).
//   [WAIT]   the core is stalled until the CPU's report comes back.
//            conflict -> squash the buffered stores of sections >= j, restart
//            the core from rollback point j (restart pulse one cycle later,
//            restart_sec = j) and return to EXEC in section j.
//            no conflict -> start the commit.
//   [COMMIT] stores drain to memory; on wb_commit_done, task_done pulses and
//            the controller returns to IDLE.
// stall is high in SEND, WAIT and COMMIT. rollbacks counts restarts of the
// current task (saturating), for statistics.
//
// From the paper: speculative execution, the end-of-task check, waiting for
// the report, re-execution from the first conflicting rollback point, commit
// only when the check passes (its timeline figures). State encoding, the
// one-cycle SEND phase, keeping extra breakpoints in the last section and the
// handshake timing are this design's choices.
module mrcn_controller
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC = NUM_SEC_DEF,
  localparam int SEC_W  = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // from the NMP core
  input  logic             task_start,
  input  logic             bp_mark,
  input  logic             task_end,
  // to the NMP core
  output logic             stall,
  output logic             restart,
  output logic [SEC_W-1:0] restart_sec,
  output logic             task_done,
  output logic             executing,
  output logic [SEC_W-1:0] cur_sec,
  // rollback point table
  output logic             rp_wr,
  output logic [SEC_W-1:0] rp_wr_idx,
  output logic             rp_clear,
  // signatures and link
  output logic             sig_send,
  output logic             sig_clear,
  input  logic             rep_valid,
  input  report_t          rep,
  // write buffer
  output logic             wb_squash,
  output logic [SEC_W-1:0] wb_squash_sec,
  output logic             wb_commit,
  input  logic             wb_commit_done,
  output logic [7:0]       rollbacks
);

  typedef enum logic [2:0] {S_IDLE, S_EXEC, S_SEND, S_WAIT, S_COMMIT} state_e;
  state_e state_q;

  logic [SEC_W-1:0] sec_q;
  logic [SEC_W-1:0] rep_sec;

  assign rep_sec = (int'(rep.sec) < NUM_SEC) ? SEC_W'(rep.sec) : SEC_W'(NUM_SEC - 1);

  always_comb begin
    stall         = (state_q == S_SEND) || (state_q == S_WAIT) || (state_q == S_COMMIT);
    executing     = (state_q == S_EXEC);
    cur_sec       = sec_q;
    rp_wr         = 1'b0;
    rp_wr_idx     = '0;
    rp_clear      = 1'b0;
    sig_send      = (state_q == S_SEND);
    sig_clear     = (state_q == S_SEND);
    wb_squash     = 1'b0;
    wb_squash_sec = rep_sec;
    wb_commit     = 1'b0;
    task_done     = 1'b0;
    unique case (state_q)
      S_IDLE: if (task_start) begin
        rp_clear  = 1'b1;
        rp_wr     = 1'b1;
        rp_wr_idx = '0;
      end
      S_EXEC: if (bp_mark && !task_end && (int'(sec_q) < NUM_SEC - 1)) begin
        rp_wr     = 1'b1;
        rp_wr_idx = sec_q + 1'b1;
      end
      S_WAIT: if (rep_valid) begin
        wb_squash = rep.conflict;
        wb_commit = !rep.conflict;
      end
      S_COMMIT: if (wb_commit_done) begin
        task_done = 1'b1;
        rp_clear  = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      sec_q       <= '0;
      restart     <= 1'b0;
      restart_sec <= '0;
      rollbacks   <= '0;
    end else begin
      restart <= 1'b0;
      unique case (state_q)
        S_IDLE: if (task_start) begin
          state_q   <= S_EXEC;
          sec_q     <= '0;
          rollbacks <= '0;
        end
        S_EXEC: begin
          if (task_end)            state_q <= S_SEND;
          else if (rp_wr)          sec_q   <= rp_wr_idx;
        end
        S_SEND: state_q <= S_WAIT;
        S_WAIT: if (rep_valid) begin
          if (rep.conflict) begin
            state_q     <= S_EXEC;
            sec_q       <= rep_sec;
            restart     <= 1'b1;
            restart_sec <= rep_sec;
            if (rollbacks != 8'hff) rollbacks <= rollbacks + 1'b1;
          end else begin
            state_q <= S_COMMIT;
          end
        end
        S_COMMIT: if (wb_commit_done) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_report_only_when_waiting : assert property (@(posedge clk) disable iff (!rst_n)
    rep_valid |-> state_q == S_WAIT)
    else $error("mrcn_controller: report outside WAIT");

endmodule
