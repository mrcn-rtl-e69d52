// cpu_coherence_unit -- host-side validation engine of MRCN.
//
// Runs beside the host CPU's normal fine-grained coherence. It records the
// CPU's writes to shared memory (cpu_write_history). When a near-memory task's
// signature arrives it freezes that record, keeps a copy of the signature,
// checks the record against every section (conflict_checker), takes the
// earliest conflicting section (first_conflict_encoder) and returns a report:
//   conflict=0            -> the NMP may commit;
//   conflict=1, sec=j     -> the NMP re-executes from rollback point j;
//   conflict=1, ovf=1     -> the record overflowed, re-execute from point 0.
// The frozen record is erased as the report leaves; writes made meanwhile are
// already in the other bank and count for the next check.
//
// Timing: sig_valid is a one-cycle pulse; rep_valid pulses BEATS+2 cycles
// later (10 at the defaults). Only one signature may be outstanding.
//
// From the paper: write recording, erase after validation, comparison with the
// NMP addresses, priority encoder. Report format, overflow rule and timing are
// this design's choices.
module cpu_coherence_unit
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC         = NUM_SEC_DEF,
  parameter int SIG_BITS        = SIG_BITS_DEF,
  parameter int SIG_HASHES      = SIG_HASHES_DEF,
  parameter int HIST_DEPTH      = HIST_DEPTH_DEF,
  parameter int CHECK_LANES     = CHECK_LANES_DEF,
  parameter bit CHECK_NMP_READS = 1'b1,
  localparam int SEC_W = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              cpu_wr_valid,
  input  addr_t                             cpu_wr_addr,
  input  logic                              sig_valid,
  input  logic [NUM_SEC-1:0][SIG_BITS-1:0]  sig_rd,
  input  logic [NUM_SEC-1:0][SIG_BITS-1:0]  sig_wr,
  output logic                              rep_valid,
  output report_t                           rep
);

  logic [NUM_SEC-1:0][SIG_BITS-1:0] rd_q, wr_q;
  logic                             start_q;
  logic                             chk_busy, chk_done;
  logic [NUM_SEC-1:0]               conflict_vec;
  line_t [HIST_DEPTH-1:0]           chk_lines;
  logic  [HIST_DEPTH-1:0]           chk_valid;
  logic                             chk_ovf;
  logic                             any;
  logic [SEC_W-1:0]                 first;
  logic                             pending_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= '0;
      wr_q      <= '0;
      start_q   <= 1'b0;
      pending_q <= 1'b0;
    end else begin
      start_q <= sig_valid;
      if (sig_valid) begin
        rd_q      <= sig_rd;
        wr_q      <= sig_wr;
        pending_q <= 1'b1;
      end else if (chk_done) begin
        pending_q <= 1'b0;
      end
    end
  end

  cpu_write_history #(.HIST_DEPTH(HIST_DEPTH)) u_hist (
    .clk, .rst_n,
    .cpu_wr_valid, .cpu_wr_addr,
    .swap        (sig_valid),
    .release_chk (chk_done),
    .chk_lines, .chk_valid, .chk_ovf
  );

  conflict_checker #(
    .NUM_SEC(NUM_SEC), .SIG_BITS(SIG_BITS), .SIG_HASHES(SIG_HASHES),
    .HIST_DEPTH(HIST_DEPTH), .CHECK_LANES(CHECK_LANES), .CHECK_NMP_READS(CHECK_NMP_READS)
  ) u_chk (
    .clk, .rst_n,
    .start (start_q),
    .rd_sig(rd_q), .wr_sig(wr_q),
    .lines (chk_lines), .valid(chk_valid),
    .busy  (chk_busy), .done(chk_done),
    .conflict_vec
  );

  first_conflict_encoder #(.NUM_SEC(NUM_SEC)) u_enc (
    .conflict_vec, .any, .first
  );

  always_comb begin
    rep_valid    = chk_done;
    rep.ovf      = chk_ovf;
    rep.conflict = any | chk_ovf;
    rep.sec      = chk_ovf ? 8'd0 : 8'(first);
  end

  a_one_signature : assert property (@(posedge clk) disable iff (!rst_n)
    sig_valid |-> !pending_q)
    else $error("cpu_coherence_unit: signature while a check is pending");

endmodule
