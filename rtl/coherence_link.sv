// coherence_link -- fixed-latency message channel between NMP and CPU.
//
// Models the off-chip hop that a coherence message takes between the memory
// stack and the host: a message accepted on in_valid/in_msg appears on
// out_valid/out_msg for one cycle exactly LAT cycles later. The MRCN protocol
// is stop-and-wait (one signature, then one report), so one message in flight
// per direction is enough; busy is high while it travels and a second message
// must not be offered then (asserted).
//
// From the paper: the signature-to-report round trip takes 40-50 cycles.
// This design's choices: a single-message delay line, LAT = 18 per direction,
// which with the 8-9 cycle CPU check gives a 45-cycle round trip; no
// serialisation or flow control.
module coherence_link #(
  parameter int W   = 8,
  parameter int LAT = mrcn_pkg::LINK_LAT_DEF,
  localparam int CNT_W = $clog2(LAT + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_msg,
  output logic         out_valid,
  output logic [W-1:0] out_msg,
  output logic         busy
);

  logic [CNT_W-1:0] cnt_q;
  logic [W-1:0]     msg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      msg_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && !busy) begin
        msg_q <= in_msg;
        if (LAT <= 1) out_valid <= 1'b1;
        else          cnt_q     <= CNT_W'(LAT - 1);
      end else if (cnt_q != '0) begin
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CNT_W'(1)) out_valid <= 1'b1;
      end
    end
  end

  assign busy    = (cnt_q != '0);
  assign out_msg = msg_q;

  a_one_in_flight : assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("coherence_link: message offered while one is in flight");

endmodule
