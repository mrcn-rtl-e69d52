// cpu_write_history -- record of CPU writes to shared memory between checks.
//
// The host CPU keeps running while the near-memory core executes an offloaded
// task; every line it writes in the shared region is noted here. When a task's
// signature arrives, swap freezes the current record for checking and opens
// the other (empty) bank for new writes, so no CPU write is missed during the
// check. release erases the frozen bank once the check is done.
//
// A bank holds HIST_DEPTH distinct lines; a write to a line already in the
// active bank takes no new entry. A write that finds the bank full sets the
// bank's overflow flag, which makes the check conservative (conflict in the
// first section, i.e. a whole-task rollback).
//
// Interface: cpu_wr_valid/cpu_wr_addr one write per cycle; swap and release
// (release_chk) are single-cycle pulses; chk_lines/chk_valid/chk_ovf show the
// frozen bank.
// A write in the swap cycle goes to the new active bank.
//
// From the paper: the CPU records its writes until validation and erases the
// history afterwards. Two banks, the depth and the overflow rule are this
// design's choices.
module cpu_write_history
  import mrcn_pkg::*;
#(
  parameter int HIST_DEPTH = HIST_DEPTH_DEF,
  localparam int CNT_W = $clog2(HIST_DEPTH + 1),
  localparam int IDX_W = (HIST_DEPTH > 1) ? $clog2(HIST_DEPTH) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cpu_wr_valid,
  input  addr_t                        cpu_wr_addr,
  input  logic                         swap,
  input  logic                         release_chk,
  output line_t [HIST_DEPTH-1:0]       chk_lines,
  output logic  [HIST_DEPTH-1:0]       chk_valid,
  output logic                         chk_ovf
);

  line_t [1:0][HIST_DEPTH-1:0] line_q;
  logic  [1:0][HIST_DEPTH-1:0] vld_q;
  logic  [1:0]                 ovf_q;
  logic  [1:0][CNT_W-1:0]      cnt_q;
  logic                        act_q;     // bank taking new writes

  logic  act_n;
  line_t wl;
  logic  seen;

  assign act_n = swap ? ~act_q : act_q;
  assign wl    = line_of(cpu_wr_addr);

  always_comb begin
    seen = 1'b0;
    for (int i = 0; i < HIST_DEPTH; i++)
      if (!swap && vld_q[act_q][i] && line_q[act_q][i] == wl) seen = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_q <= '0;
      vld_q  <= '0;
      ovf_q  <= '0;
      cnt_q  <= '0;
      act_q  <= 1'b0;
    end else begin
      act_q <= act_n;
      if (release_chk) begin
        vld_q[~act_q] <= '0;
        ovf_q[~act_q] <= 1'b0;
        cnt_q[~act_q] <= '0;
      end
      if (cpu_wr_valid && !seen) begin
        if (cnt_q[act_n] == CNT_W'(HIST_DEPTH)) begin
          ovf_q[act_n] <= 1'b1;
        end else begin
          line_q[act_n][IDX_W'(cnt_q[act_n])] <= wl;
          vld_q[act_n][IDX_W'(cnt_q[act_n])]  <= 1'b1;
          cnt_q[act_n]                <= cnt_q[act_n] + 1'b1;
        end
      end
    end
  end

  assign chk_lines = line_q[~act_q];
  assign chk_valid = vld_q[~act_q];
  assign chk_ovf   = ovf_q[~act_q];

  a_release_not_with_swap : assert property (@(posedge clk) disable iff (!rst_n)
    !(swap && release_chk))
    else $error("cpu_write_history: swap and release in the same cycle");

endmodule
