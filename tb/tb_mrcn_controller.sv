// tb_mrcn_controller -- walks the NMP-side sequencer through the phases of a
// task and checks every control output cycle by cycle: rollback-point writes
// at task start and at each breakpoint (saturating in the last section), the
// one-cycle signature send, the stall while waiting, squash and restart from
// the reported section (including a clamp of an out-of-range section), the
// rollback counter, and commit followed by task_done.
module tb_mrcn_controller;
  import mrcn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic task_start = 0, bp_mark = 0, task_end = 0, rep_valid = 0, wb_commit_done = 0;
  report_t rep = '0;
  logic stall, restart, task_done, executing, rp_wr, rp_clear, sig_send, sig_clear, wb_squash, wb_commit;
  logic [2:0] restart_sec, cur_sec, rp_wr_idx, wb_squash_sec;
  logic [7:0] rollbacks;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mrcn_controller dut (.clk, .rst_n, .task_start, .bp_mark, .task_end, .stall, .restart, .restart_sec,
    .task_done, .executing, .cur_sec, .rp_wr, .rp_wr_idx, .rp_clear, .sig_send, .sig_clear,
    .rep_valid, .rep, .wb_squash, .wb_squash_sec, .wb_commit, .wb_commit_done, .rollbacks);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %b exp %b", what, got, exp); end
  endtask
  task automatic expect_int(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask
  task automatic tick();
    @(posedge clk); #1;
    task_start = 0; bp_mark = 0; task_end = 0; rep_valid = 0; wb_commit_done = 0;
    #1;
  endtask

  // end the task and return the report after a delay
  task automatic end_and_report(bit conflict, bit ovf, int sec);
    task_end = 1; #1;
    tick();
    expect_bit("send", sig_send, 1); expect_bit("clear", sig_clear, 1); expect_bit("stall in send", stall, 1);
    tick();
    expect_bit("send one cycle", sig_send, 0);
    repeat (20) begin expect_bit("stall in wait", stall, 1); tick(); end
    rep.conflict = conflict; rep.ovf = ovf; rep.sec = 8'(sec); rep_valid = 1; #1;
    expect_bit("squash", wb_squash, conflict);
    expect_bit("commit", wb_commit, !conflict);
    if (conflict) expect_int("squash sec", int'(wb_squash_sec), (sec > 4) ? 4 : sec);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    tick();
    expect_bit("idle not stalled", stall, 0);
    expect_bit("idle not executing", executing, 0);
    // task start records rollback point 0
    task_start = 1; #1;
    expect_bit("rp_wr at start", rp_wr, 1); expect_bit("rp_clear at start", rp_clear, 1);
    expect_int("rp idx at start", int'(rp_wr_idx), 0);
    tick();
    expect_bit("executing", executing, 1);
    // breakpoints 1..4, then two more that stay in section 4
    for (int b = 1; b <= 6; b++) begin
      repeat (3) tick();
      bp_mark = 1; #1;
      expect_bit($sformatf("rp_wr at bp %0d", b), rp_wr, b <= 4);
      if (b <= 4) expect_int("rp idx", int'(rp_wr_idx), b);
      tick();
      expect_int("cur_sec", int'(cur_sec), (b <= 4) ? b : 4);
    end
    // conflict in section 2
    end_and_report(1, 0, 2);
    tick();
    expect_bit("restart", restart, 1); expect_int("restart sec", int'(restart_sec), 2);
    expect_int("cur_sec after rollback", int'(cur_sec), 2); expect_bit("running again", stall, 0);
    expect_int("rollbacks", int'(rollbacks), 1);
    tick();
    expect_bit("restart one cycle", restart, 0);
    bp_mark = 1; #1;
    expect_int("rp idx after rollback", int'(rp_wr_idx), 3);
    tick();
    // overflow report: back to section 0
    end_and_report(1, 1, 0);
    tick();
    expect_int("restart sec ovf", int'(restart_sec), 0); expect_int("rollbacks", int'(rollbacks), 2);
    // out-of-range section is clamped to the last one
    end_and_report(1, 0, 7);
    tick();
    expect_int("restart sec clamp", int'(restart_sec), 4);
    // clean: commit
    end_and_report(0, 0, 0);
    tick();
    for (int c = 0; c < 7; c++) begin
      expect_bit("stall in commit", stall, 1); expect_bit("no done yet", task_done, 0); tick();
    end
    wb_commit_done = 1; #1;
    expect_bit("task_done", task_done, 1); expect_bit("rp_clear at done", rp_clear, 1);
    tick();
    expect_bit("idle after commit", stall, 0); expect_bit("not executing", executing, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
