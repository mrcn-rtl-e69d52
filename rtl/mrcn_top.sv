// mrcn_top -- MRCN coherence hardware between one near-memory core and the host.
//
// The near-memory (NMP) core runs an offloaded task speculatively, as if it
// held every coherence permission. The task is cut into NUM_SEC sections by
// breakpoints. While it runs:
//   * section_signature records each access in the section's Bloom filters;
//   * spec_write_buffer holds each store, tagged with its section, and
//     forwards it to later loads;
//   * rollback_point_table keeps the restart PC/context of every section.
// At the end of the task mrcn_controller sends the signatures over
// coherence_link to cpu_coherence_unit, which checks them against the lines
// the CPU wrote meanwhile and returns, over a second coherence_link, either
// "no conflict" (the buffered stores are committed to memory in 8 cycles) or
// the first conflicting section j (stores of sections >= j are discarded and
// the core restarts from rollback point j; sections before j are kept).
//
// Ports: core_* is the NMP core side (task macros, breakpoints, accesses,
// stall/restart); cpu_wr_* is the stream of CPU writes to shared memory seen
// by the host's coherence fabric; mem_wr is the commit port into the 3D
// memory, LANES stores per cycle in program order. Accesses are accepted only
// while the task executes (core_stall low).
//
// Timing at the defaults: end of task to report = 1 (SEND) + 18 (link) + 10
// (check) + 18 (link) = 47 cycles, within the 40-50 cycles the paper gives;
// commit = 8 cycles as in the paper. The link latency and everything else not
// listed as the paper's in the sub-blocks are this design's choices. One core
// is served; the 16-core NMP mesh would replicate the NMP side per core.
module mrcn_top
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC         = NUM_SEC_DEF,
  parameter int SIG_BITS        = SIG_BITS_DEF,
  parameter int SIG_HASHES      = SIG_HASHES_DEF,
  parameter int WB_DEPTH        = WB_DEPTH_DEF,
  parameter int COMMIT_CYCLES   = COMMIT_CYCLES_DEF,
  parameter int HIST_DEPTH      = HIST_DEPTH_DEF,
  parameter int CHECK_LANES     = CHECK_LANES_DEF,
  parameter int LINK_LAT        = LINK_LAT_DEF,
  parameter bit CHECK_NMP_READS = 1'b1,
  localparam int SEC_W  = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1,
  localparam int LANES  = (WB_DEPTH + COMMIT_CYCLES - 1) / COMMIT_CYCLES,
  localparam int SIG_W  = 2 * NUM_SEC * SIG_BITS,
  localparam int REP_W  = $bits(report_t)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // NMP core: task control
  input  logic                 core_task_start,
  input  logic [PC_W-1:0]      core_start_pc,
  input  logic [CTX_W-1:0]     core_start_ctx,
  input  logic                 core_bp_mark,
  input  logic [PC_W-1:0]      core_bp_pc,
  input  logic [CTX_W-1:0]     core_bp_ctx,
  input  logic                 core_task_end,
  // NMP core: memory accesses of the task
  input  logic                 core_acc_valid,
  input  logic                 core_acc_we,
  input  addr_t                core_acc_addr,
  input  data_t                core_acc_wdata,
  output logic                 core_fwd_hit,
  output data_t                core_fwd_data,
  // NMP core: flow control
  output logic                 core_stall,
  output logic                 core_restart,
  output logic [SEC_W-1:0]     core_restart_sec,
  output logic [PC_W-1:0]      core_restart_pc,
  output logic [CTX_W-1:0]     core_restart_ctx,
  output logic [SEC_W-1:0]     core_cur_sec,
  output logic                 core_task_done,
  // host CPU writes to shared memory
  input  logic                 cpu_wr_valid,
  input  addr_t                cpu_wr_addr,
  // commit into the 3D memory
  output mem_wr_t [LANES-1:0]  mem_wr,
  // observation
  output logic                 rep_seen,
  output report_t              rep_last,
  output logic [7:0]           task_rollbacks,
  output logic                 wb_overflow
);

  // ---------------- NMP side ----------------
  logic             executing;
  logic             rp_wr, rp_clear, rp_ok;
  logic [SEC_W-1:0] rp_wr_idx;
  logic             sig_send, sig_clear;
  logic             wb_squash, wb_commit, wb_commit_done, wb_committing, wb_full;
  logic [SEC_W-1:0] wb_squash_sec;
  logic [$clog2(WB_DEPTH+1)-1:0] wb_count;
  logic             nmp_rep_valid;
  report_t          nmp_rep;
  logic [NUM_SEC-1:0][SIG_BITS-1:0] rd_sig, wr_sig;

  mrcn_controller #(.NUM_SEC(NUM_SEC)) u_ctrl (
    .clk, .rst_n,
    .task_start    (core_task_start),
    .bp_mark       (core_bp_mark),
    .task_end      (core_task_end),
    .stall         (core_stall),
    .restart       (core_restart),
    .restart_sec   (core_restart_sec),
    .task_done     (core_task_done),
    .executing,
    .cur_sec       (core_cur_sec),
    .rp_wr, .rp_wr_idx, .rp_clear,
    .sig_send, .sig_clear,
    .rep_valid     (nmp_rep_valid),
    .rep           (nmp_rep),
    .wb_squash, .wb_squash_sec, .wb_commit,
    .wb_commit_done,
    .rollbacks     (task_rollbacks)
  );

  rollback_point_table #(.NUM_SEC(NUM_SEC)) u_rpt (
    .clk, .rst_n,
    .clear  (rp_clear),
    .wr_en  (rp_wr),
    .wr_idx (rp_wr_idx),
    .wr_pc  (core_task_start && !executing ? core_start_pc  : core_bp_pc),
    .wr_ctx (core_task_start && !executing ? core_start_ctx : core_bp_ctx),
    .rd_idx (core_restart_sec),
    .rd_pc  (core_restart_pc),
    .rd_ctx (core_restart_ctx),
    .rd_ok  (rp_ok)
  );

  section_signature #(.NUM_SEC(NUM_SEC), .SIG_BITS(SIG_BITS), .SIG_HASHES(SIG_HASHES)) u_sig (
    .clk, .rst_n,
    .ins_valid (core_acc_valid && executing),
    .ins_we    (core_acc_we),
    .ins_addr  (core_acc_addr),
    .ins_sec   (core_cur_sec),
    .clear     (sig_clear),
    .rd_sig, .wr_sig
  );

  spec_write_buffer #(.NUM_SEC(NUM_SEC), .WB_DEPTH(WB_DEPTH), .COMMIT_CYCLES(COMMIT_CYCLES)) u_wb (
    .clk, .rst_n,
    .wr_valid   (core_acc_valid && core_acc_we && executing),
    .wr_addr    (core_acc_addr),
    .wr_data    (core_acc_wdata),
    .wr_sec     (core_cur_sec),
    .squash     (wb_squash),
    .squash_sec (wb_squash_sec),
    .ld_addr    (core_acc_addr),
    .ld_hit     (core_fwd_hit),
    .ld_data    (core_fwd_data),
    .commit     (wb_commit),
    .mem_wr,
    .commit_done(wb_commit_done),
    .committing (wb_committing),
    .count      (wb_count),
    .full       (wb_full),
    .overflow   (wb_overflow)
  );

  // ---------------- links ----------------
  logic             cpu_sig_valid;
  logic [SIG_W-1:0] cpu_sig_msg;
  logic             cpu_rep_valid;
  report_t          cpu_rep;
  logic [REP_W-1:0] nmp_rep_bits;
  logic             fwd_busy, back_busy;

  coherence_link #(.W(SIG_W), .LAT(LINK_LAT)) u_link_sig (
    .clk, .rst_n,
    .in_valid  (sig_send),
    .in_msg    ({wr_sig, rd_sig}),
    .out_valid (cpu_sig_valid),
    .out_msg   (cpu_sig_msg),
    .busy      (fwd_busy)
  );

  coherence_link #(.W(REP_W), .LAT(LINK_LAT)) u_link_rep (
    .clk, .rst_n,
    .in_valid  (cpu_rep_valid),
    .in_msg    (cpu_rep),
    .out_valid (nmp_rep_valid),
    .out_msg   (nmp_rep_bits),
    .busy      (back_busy)
  );
  assign nmp_rep = report_t'(nmp_rep_bits);

  // ---------------- CPU side ----------------
  cpu_coherence_unit #(
    .NUM_SEC(NUM_SEC), .SIG_BITS(SIG_BITS), .SIG_HASHES(SIG_HASHES),
    .HIST_DEPTH(HIST_DEPTH), .CHECK_LANES(CHECK_LANES), .CHECK_NMP_READS(CHECK_NMP_READS)
  ) u_cpu (
    .clk, .rst_n,
    .cpu_wr_valid, .cpu_wr_addr,
    .sig_valid (cpu_sig_valid),
    .sig_rd    (cpu_sig_msg[0 +: NUM_SEC*SIG_BITS]),
    .sig_wr    (cpu_sig_msg[NUM_SEC*SIG_BITS +: NUM_SEC*SIG_BITS]),
    .rep_valid (cpu_rep_valid),
    .rep       (cpu_rep)
  );

  // last report, for observation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep_seen <= 1'b0;
      rep_last <= '0;
    end else if (nmp_rep_valid) begin
      rep_seen <= 1'b1;
      rep_last <= nmp_rep;
    end
  end

  a_acc_only_when_executing : assert property (@(posedge clk) disable iff (!rst_n)
    core_acc_valid |-> executing)
    else $error("mrcn_top: core access while not executing a task");
  a_restart_point_known : assert property (@(posedge clk) disable iff (!rst_n)
    core_restart |-> rp_ok)
    else $error("mrcn_top: restart from an unrecorded rollback point");

endmodule
