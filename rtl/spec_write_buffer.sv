// spec_write_buffer -- speculative store buffer of the near-memory core.
//
// Stores made while an offloaded task runs must not reach memory before the
// CPU has validated the task. They are held here, each tagged with the
// section (rollback-point interval) that made it. Entries are kept in
// program order, so section tags never decrease along the buffer:
//   * a rollback to section j keeps exactly the entries tagged < j, which is
//     a prefix of the buffer, so squash just shortens it;
//   * a store to an address already buffered by the same section overwrites
//     that entry instead of taking a new one;
//   * loads look the buffer up and get the youngest matching store;
//   * commit writes every entry to memory over exactly COMMIT_CYCLES cycles,
//     LANES = WB_DEPTH/COMMIT_CYCLES entries per cycle on mem_wr, lane order
//     = program order (a memory controller must apply higher lanes later).
//
// Interface and timing: wr_* inserts in one cycle. squash/squash_sec trims in
// one cycle. commit starts a drain: mem_wr carries beat 0 in the next cycle
// and beat COMMIT_CYCLES-1 (with commit_done) COMMIT_CYCLES cycles after the
// commit pulse; the buffer is empty after that. overflow is sticky until the
// next commit or squash: a store arriving with the buffer full is lost.
//
// From the paper: the NMP commits its changes only after the coherence
// transaction, the commit costs 8 cycles, and tag bits mark what a conflict
// concerns. Depth, coalescing, forwarding and the lane-parallel drain are this
// design's choices.
module spec_write_buffer
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC       = NUM_SEC_DEF,
  parameter int WB_DEPTH      = WB_DEPTH_DEF,
  parameter int COMMIT_CYCLES = COMMIT_CYCLES_DEF,
  localparam int SEC_W  = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1,
  localparam int CNT_W  = $clog2(WB_DEPTH + 1),
  localparam int IDX_W  = (WB_DEPTH > 1) ? $clog2(WB_DEPTH) : 1,
  localparam int LANES  = (WB_DEPTH + COMMIT_CYCLES - 1) / COMMIT_CYCLES,
  localparam int BEAT_W = (COMMIT_CYCLES > 1) ? $clog2(COMMIT_CYCLES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // speculative store
  input  logic                  wr_valid,
  input  addr_t                 wr_addr,
  input  data_t                 wr_data,
  input  logic [SEC_W-1:0]      wr_sec,
  // rollback
  input  logic                  squash,
  input  logic [SEC_W-1:0]      squash_sec,
  // load forwarding
  input  addr_t                 ld_addr,
  output logic                  ld_hit,
  output data_t                 ld_data,
  // commit
  input  logic                  commit,
  output mem_wr_t [LANES-1:0]   mem_wr,
  output logic                  commit_done,
  output logic                  committing,
  // status
  output logic [CNT_W-1:0]      count,
  output logic                  full,
  output logic                  overflow
);

  addr_t             addr_q [WB_DEPTH];
  data_t             data_q [WB_DEPTH];
  logic [SEC_W-1:0]  sec_q  [WB_DEPTH];
  logic [CNT_W-1:0]  cnt_q;
  logic [BEAT_W-1:0] beat_q;
  logic              ovf_q;

  // same-section match for coalescing
  logic             wr_match;
  logic [CNT_W-1:0] wr_match_idx;
  always_comb begin
    wr_match     = 1'b0;
    wr_match_idx = '0;
    for (int i = 0; i < WB_DEPTH; i++) begin
      if ((CNT_W'(i) < cnt_q) && addr_q[i] == wr_addr && sec_q[i] == wr_sec) begin
        wr_match     = 1'b1;
        wr_match_idx = CNT_W'(i);
      end
    end
  end

  // youngest match for load forwarding
  always_comb begin
    ld_hit  = 1'b0;
    ld_data = '0;
    for (int i = 0; i < WB_DEPTH; i++) begin
      if ((CNT_W'(i) < cnt_q) && addr_q[i] == ld_addr) begin
        ld_hit  = 1'b1;
        ld_data = data_q[i];
      end
    end
  end

  // entries kept by a squash: those tagged below squash_sec
  logic [CNT_W-1:0] keep_cnt;
  always_comb begin
    keep_cnt = '0;
    for (int i = 0; i < WB_DEPTH; i++)
      if ((CNT_W'(i) < cnt_q) && (sec_q[i] < squash_sec)) keep_cnt = keep_cnt + 1'b1;
  end

  // commit drain lanes
  always_comb begin
    int idx;
    for (int l = 0; l < LANES; l++) begin
      idx = int'(beat_q) * LANES + l;
      mem_wr[l] = '0;
      if (committing && idx < WB_DEPTH && CNT_W'(idx) < cnt_q) begin
        mem_wr[l].valid = 1'b1;
        mem_wr[l].addr  = addr_q[idx];
        mem_wr[l].data  = data_q[idx];
      end
    end
  end

  assign commit_done = committing && (beat_q == BEAT_W'(COMMIT_CYCLES - 1));
  assign count       = cnt_q;
  assign full        = (cnt_q == CNT_W'(WB_DEPTH));
  assign overflow    = ovf_q;

  always_ff @(posedge clk) begin
    if (wr_valid && !committing) begin
      if (wr_match) begin
        data_q[IDX_W'(wr_match_idx)] <= wr_data;
      end else if (!full) begin
        addr_q[IDX_W'(cnt_q)] <= wr_addr;
        data_q[IDX_W'(cnt_q)] <= wr_data;
        sec_q[IDX_W'(cnt_q)]  <= wr_sec;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q      <= '0;
      beat_q     <= '0;
      committing <= 1'b0;
      ovf_q      <= 1'b0;
    end else if (committing) begin
      if (commit_done) begin
        committing <= 1'b0;
        beat_q     <= '0;
        cnt_q      <= '0;
        ovf_q      <= 1'b0;
      end else begin
        beat_q <= beat_q + 1'b1;
      end
    end else if (commit) begin
      committing <= 1'b1;
      beat_q     <= '0;
    end else if (squash) begin
      cnt_q <= keep_cnt;
      ovf_q <= 1'b0;
    end else if (wr_valid && !wr_match) begin
      if (full) ovf_q <= 1'b1;
      else      cnt_q <= cnt_q + 1'b1;
    end
  end

  a_no_store_in_commit : assert property (@(posedge clk) disable iff (!rst_n)
    committing |-> !wr_valid)
    else $error("spec_write_buffer: store during commit");
  a_no_store_with_squash : assert property (@(posedge clk) disable iff (!rst_n)
    (squash || commit) |-> !wr_valid)
    else $error("spec_write_buffer: store in the cycle of a squash or commit");

endmodule
