// tb_rollback_point_table -- writes random restart PCs and contexts to random
// rollback points, reads every point back against a testbench copy, and
// checks that clear forgets all entries while a write in the clear cycle is
// kept.
module tb_rollback_point_table;
  localparam int NUM_SEC = 5;
  logic clk = 0, rst_n = 0;
  logic clear = 0, wr_en = 0, rd_ok;
  logic [2:0] wr_idx = '0, rd_idx = '0;
  logic [31:0] wr_pc = '0, rd_pc;
  logic [63:0] wr_ctx = '0, rd_ctx;
  logic [31:0] m_pc [NUM_SEC];
  logic [63:0] m_ctx [NUM_SEC];
  logic        m_ok [NUM_SEC];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rollback_point_table #(.NUM_SEC(NUM_SEC)) dut (.clk, .rst_n, .clear, .wr_en, .wr_idx, .wr_pc, .wr_ctx,
                                                  .rd_idx, .rd_pc, .rd_ctx, .rd_ok);
  initial begin
    repeat (5000) @(posedge clk); #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int i = 0; i < NUM_SEC; i++) begin
      rd_idx = 3'(i);
      #1;
      checks++;
      if (rd_ok !== m_ok[i] || (m_ok[i] && (rd_pc !== m_pc[i] || rd_ctx !== m_ctx[i]))) begin
        failures++;
        $display("FAIL entry %0d ok=%b pc=%h exp ok=%b pc=%h", i, rd_ok, rd_pc, m_ok[i], m_pc[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < NUM_SEC; i++) m_ok[i] = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    read_all();
    for (int round = 0; round < 40; round++) begin
      int i;
      i = $urandom_range(0, NUM_SEC - 1);
      wr_en = 1; wr_idx = 3'(i); wr_pc = $urandom(); wr_ctx = {$urandom(), $urandom()};
      clear = (round % 10 == 9);
      @(posedge clk); #1;
      if (clear) for (int j = 0; j < NUM_SEC; j++) m_ok[j] = 0;
      m_pc[i] = wr_pc; m_ctx[i] = wr_ctx; m_ok[i] = 1;
      wr_en = 0; clear = 0;
      read_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
