// conflict_checker -- tests the CPU's write record against NMP signatures.
//
// Validation of an offloaded task: every line the CPU wrote in the checked
// window is looked up in each section's Bloom filters. A line is a member of a
// filter when all SIG_HASHES bits chosen by mrcn_pkg::sig_hash are set (so a
// false positive is possible, a false negative is not). A member of a
// section's write filter -- or, with CHECK_NMP_READS=1, of its read filter --
// marks that section as conflicting.
//
// The record is scanned CHECK_LANES entries per cycle, always the whole of
// it, so a check takes a fixed HIST_DEPTH/CHECK_LANES cycles. Timing: start is
// a pulse; done pulses BEATS+1 cycles later (sampled at the BEATS+1-th edge
// after start) with conflict_vec valid in that cycle and held until the next
// start. sig, lines and valid must be stable while the check runs.
//
// From the paper: the CPU compares the addresses sent by the NMP with its own
// writes of the same period. The paper also says a CPU write against an NMP
// read needs no re-execution, which contradicts that comparison; the
// comparison is followed by default and CHECK_NMP_READS=0 gives the other
// reading (CPU writes against NMP writes only). Lane count and scan order are
// this design's choices.
module conflict_checker
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC         = NUM_SEC_DEF,
  parameter int SIG_BITS        = SIG_BITS_DEF,
  parameter int SIG_HASHES      = SIG_HASHES_DEF,
  parameter int HIST_DEPTH      = HIST_DEPTH_DEF,
  parameter int CHECK_LANES     = CHECK_LANES_DEF,
  parameter bit CHECK_NMP_READS = 1'b1,
  localparam int IDX_W  = $clog2(SIG_BITS),
  localparam int BEATS  = (HIST_DEPTH + CHECK_LANES - 1) / CHECK_LANES,
  localparam int BEAT_W = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [NUM_SEC-1:0][SIG_BITS-1:0]  rd_sig,
  input  logic [NUM_SEC-1:0][SIG_BITS-1:0]  wr_sig,
  input  line_t [HIST_DEPTH-1:0]            lines,
  input  logic  [HIST_DEPTH-1:0]            valid,
  output logic                              busy,
  output logic                              done,
  output logic [NUM_SEC-1:0]                conflict_vec
);

  logic [BEAT_W-1:0]  beat_q;
  logic [NUM_SEC-1:0] acc_q;
  logic [NUM_SEC-1:0] hits;

  // hash positions of the lines scanned this beat (shared by all sections)
  logic [CHECK_LANES-1:0][SIG_HASHES-1:0][IDX_W-1:0] idx;
  logic [CHECK_LANES-1:0]                            lane_ok;
  always_comb begin
    int e;
    for (int l = 0; l < CHECK_LANES; l++) begin
      e = int'(beat_q) * CHECK_LANES + l;
      lane_ok[l] = (e < HIST_DEPTH) ? valid[e] : 1'b0;
      for (int k = 0; k < SIG_HASHES; k++)
        idx[l][k] = (e < HIST_DEPTH) ? IDX_W'(sig_hash(lines[e], k, IDX_W)) : '0;
    end
  end

  always_comb begin
    logic in_rd, in_wr;
    hits = '0;
    for (int l = 0; l < CHECK_LANES; l++) begin
      for (int s = 0; s < NUM_SEC; s++) begin
        in_rd = 1'b1;
        in_wr = 1'b1;
        for (int k = 0; k < SIG_HASHES; k++) begin
          in_rd = in_rd & rd_sig[s][idx[l][k]];
          in_wr = in_wr & wr_sig[s][idx[l][k]];
        end
        if (lane_ok[l] && (in_wr || (CHECK_NMP_READS && in_rd))) hits[s] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      done         <= 1'b0;
      beat_q       <= '0;
      acc_q        <= '0;
      conflict_vec <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy   <= 1'b1;
        beat_q <= '0;
        acc_q  <= '0;
      end else if (busy) begin
        if (beat_q == BEAT_W'(BEATS - 1)) begin
          busy         <= 1'b0;
          done         <= 1'b1;
          conflict_vec <= acc_q | hits;
        end else begin
          beat_q <= beat_q + 1'b1;
          acc_q  <= acc_q | hits;
        end
      end
    end
  end

endmodule
