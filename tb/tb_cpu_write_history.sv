// tb_cpu_write_history -- CPU write record with 8 lines per bank. Checked:
// distinct lines are recorded once each, swap freezes exactly the writes
// made before it (a write in the swap cycle belongs to the next window),
// writes during the check land in the other bank, release erases the frozen
// bank, and a ninth distinct line sets the overflow flag.
module tb_cpu_write_history;
  import mrcn_pkg::*;
  localparam int HIST_DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic cpu_wr_valid = 0, swap = 0, release_chk = 0;
  addr_t cpu_wr_addr = '0;
  line_t [HIST_DEPTH-1:0] chk_lines;
  logic  [HIST_DEPTH-1:0] chk_valid;
  logic chk_ovf;
  int checks = 0, failures = 0;
  bit window[line_t];
  bit frozen[line_t];
  bit frozen_ovf;

  always #5 clk = ~clk;
  cpu_write_history #(.HIST_DEPTH(HIST_DEPTH)) dut (.clk, .rst_n, .cpu_wr_valid, .cpu_wr_addr,
    .swap, .release_chk, .chk_lines, .chk_valid, .chk_ovf);

  initial begin
    repeat (20000) @(posedge clk); #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_frozen(string what);
    bit got[line_t];
    int n;
    n = 0;
    for (int i = 0; i < HIST_DEPTH; i++) if (chk_valid[i]) begin got[chk_lines[i]] = 1; n++; end
    checks++;
    if (got != frozen || n != got.size() || chk_ovf !== frozen_ovf) begin
      failures++;
      $display("FAIL %s: %0d entries (%0d distinct) exp %0d, ovf=%b exp %b", what, n, got.size(), frozen.size(), chk_ovf, frozen_ovf);
    end
  endtask

  // one cycle: optional CPU write of a line from a small pool, optional swap/release
  task automatic cyc(bit w, bit sw, bit rl);
    line_t ln;
    ln = line_t'($urandom_range(0, 11));
    cpu_wr_valid = w; cpu_wr_addr = {ln, 6'($urandom())}; swap = sw; release_chk = rl;
    @(posedge clk); #1;
    if (sw) begin frozen = window; window.delete(); frozen_ovf = (frozen.size() > HIST_DEPTH); end
    if (rl) begin frozen.delete(); frozen_ovf = 0; end
    if (w) window[ln] = 1;
    cpu_wr_valid = 0; swap = 0; release_chk = 0;
    #1;
  endtask

  initial begin
    frozen_ovf = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    check_frozen("reset");
    for (int round = 0; round < 40; round++) begin
      int nw;
      nw = $urandom_range(0, 14);
      for (int i = 0; i < nw; i++) cyc($urandom_range(0, 1), 0, 0);
      // the model counts distinct lines; overflow when more than HIST_DEPTH
      cyc($urandom_range(0, 1), 1, 0);
      if (frozen.size() > HIST_DEPTH) begin
        // only the first HIST_DEPTH distinct lines are kept: compare the flag and the count
        int n;
        n = 0;
        for (int i = 0; i < HIST_DEPTH; i++) if (chk_valid[i]) n++;
        checks++;
        if (!chk_ovf || n != HIST_DEPTH) begin failures++; $display("FAIL overflow ovf=%b n=%0d", chk_ovf, n); end
      end else begin
        check_frozen($sformatf("swap %0d", round));
      end
      for (int i = 0; i < 9; i++) cyc($urandom_range(0, 1), 0, 0);
      if (frozen.size() <= HIST_DEPTH) check_frozen("during check");
      cyc($urandom_range(0, 1), 0, 1);
      check_frozen("after release");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
