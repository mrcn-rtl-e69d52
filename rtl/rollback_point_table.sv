// rollback_point_table -- restart information for each rollback point.
//
// An offloaded task is cut into NUM_SEC sections; at the start of each the
// near-memory core reports where it is (restart PC) and a context word (for
// example the address of the register checkpoint it keeps). When validation
// finds that section j conflicts, the core is restarted from entry j, so the
// work of sections 0..j-1 is kept.
//
// Interface: one write port (wr_en/wr_idx/wr_pc/wr_ctx), visible from the
// next cycle; one asynchronous read port (rd_idx -> rd_pc/rd_ctx/rd_ok, where
// rd_ok says the entry was recorded since the last clear). clear forgets
// every entry (done when a task starts or commits).
//
// From the paper: rollback points marked inside the task, each holding where
// a rollback restarts. What an entry holds (PC plus one context word) is this
// design's choice.
module rollback_point_table
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC = NUM_SEC_DEF,
  localparam int SEC_W  = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr_en,
  input  logic [SEC_W-1:0] wr_idx,
  input  logic [PC_W-1:0]  wr_pc,
  input  logic [CTX_W-1:0] wr_ctx,
  input  logic [SEC_W-1:0] rd_idx,
  output logic [PC_W-1:0]  rd_pc,
  output logic [CTX_W-1:0] rd_ctx,
  output logic             rd_ok
);

  logic [NUM_SEC-1:0][PC_W-1:0]  pc_q;
  logic [NUM_SEC-1:0][CTX_W-1:0] ctx_q;
  logic [NUM_SEC-1:0]            ok_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q  <= '0;
      ctx_q <= '0;
      ok_q  <= '0;
    end else begin
      if (clear) ok_q <= '0;
      if (wr_en && (int'(wr_idx) < NUM_SEC)) begin
        pc_q[wr_idx]  <= wr_pc;
        ctx_q[wr_idx] <= wr_ctx;
        ok_q[wr_idx]  <= 1'b1;
      end
    end
  end

  always_comb begin
    rd_pc  = '0;
    rd_ctx = '0;
    rd_ok  = 1'b0;
    if (int'(rd_idx) < NUM_SEC) begin
      rd_pc  = pc_q[rd_idx];
      rd_ctx = ctx_q[rd_idx];
      rd_ok  = ok_q[rd_idx];
    end
  end

endmodule
