// first_conflict_encoder -- picks the rollback point after a failed validation.
//
// The CPU-side check yields one conflict bit per section of the offloaded
// task. Several sections may conflict; the task must restart from the
// earliest of them, because everything after a stale read is suspect while
// everything before it is still valid. This priority encoder returns the
// lowest set index.
//
// Interface: purely combinational. any = some bit set; first = index of the
// lowest set bit (0 when none).
//
// From the paper: a priority encoder selecting the first conflict point.
// Lowest index taking priority follows from "first".
module first_conflict_encoder #(
  parameter int NUM_SEC = mrcn_pkg::NUM_SEC_DEF,
  localparam int SEC_W  = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1
) (
  input  logic [NUM_SEC-1:0] conflict_vec,
  output logic               any,
  output logic [SEC_W-1:0]   first
);

  always_comb begin
    any   = 1'b0;
    first = '0;
    for (int i = NUM_SEC - 1; i >= 0; i--) begin
      if (conflict_vec[i]) begin
        any   = 1'b1;
        first = SEC_W'(i);
      end
    end
  end

endmodule
