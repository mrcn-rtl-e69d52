// tb_synthetic_sweep -- the synthetic-benchmark evaluation, run on the RTL.
//
// For offloaded-block sizes of 100 and 500 instructions and NMP shared-memory
// fractions f_nmp of 0.1, 0.5 and 0.9, a behavioural core runs a series of
// tasks against two copies of the design fed by the same CPU write stream:
// MRCN with 5 rollback points, and the same hardware with a single rollback
// point, which re-executes whole tasks as CONDA does. The CPU writes a random
// line of the shared region in 2% of cycles (f_cpu = 0.5 with one shared-region store in
// 25 instructions -- an assumption; the paper gives only f_cpu). The shared
// region is 16384 lines (1 MiB), also an assumption.
//
// Checked: every task of every run commits; with the same conflicts
// available, MRCN re-executes no more instructions than whole-task rollback
// summed over all runs, and takes no more cycles at f_nmp = 0.9 for
// 500-instruction blocks, the case where the paper reports the largest gain.
// The cycle counts of all runs are printed.
module tb_synthetic_sweep;
  import mrcn_pkg::*;

  localparam int NCFG = 6;
  localparam int GS [NCFG] = '{100, 100, 100, 500, 500, 500};
  localparam int FS [NCFG] = '{10, 50, 90, 10, 50, 90};
  localparam int TASKS [NCFG] = '{24, 24, 24, 8, 8, 8};

  logic clk = 0, rst_n = 0;
  logic cpu_wr_valid;
  addr_t cpu_wr_addr;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;

  // CPU write stream shared by all copies: a function of the cycle number only
  function automatic int unsigned mixc(longint c);
    int unsigned x;
    x = 32'(c) * 32'h9E3779B1 ^ 32'hA5A5_1234;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 13);
    return x;
  endfunction
  always_ff @(posedge clk) cyc <= cyc + 1;
  assign cpu_wr_valid = rst_n && (mixc(cyc) % 100 < 2);
  assign cpu_wr_addr  = 32'h4000_0000 + addr_t'(((mixc(cyc) >> 8) % 16384) * 64);

  longint cyc_m [NCFG], cyc_c [NCFG], ins_m [NCFG], ins_c [NCFG];
  int     rb_m [NCFG], rb_c [NCFG], td_m [NCFG], td_c [NCFG];
  logic   done_m [NCFG], done_c [NCFG];

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    for (genvar v = 0; v < 2; v++) begin : g_var
      localparam int NS = (v == 0) ? 5 : 1;
      localparam int SW = (NS > 1) ? $clog2(NS) : 1;
      logic task_start, bp_mark, task_end, acc_valid, acc_we, stall, restart, task_done, done;
      logic [31:0] start_pc, bp_pc, restart_pc;
      logic [63:0] start_ctx, bp_ctx, restart_ctx;
      addr_t acc_addr;
      data_t acc_wdata, fwd_data;
      logic fwd_hit, rep_seen, wb_ovf;
      logic [SW-1:0] restart_sec, cur_sec;
      report_t rep_last;
      logic [7:0] trb;
      mem_wr_t [63:0] mem_wr;
      longint cycles, instrs;
      int rollbacks, tasks_done;

      mrcn_top #(.NUM_SEC(NS)) dut (
        .clk, .rst_n,
        .core_task_start(task_start), .core_start_pc(start_pc), .core_start_ctx(start_ctx),
        .core_bp_mark(bp_mark), .core_bp_pc(bp_pc), .core_bp_ctx(bp_ctx), .core_task_end(task_end),
        .core_acc_valid(acc_valid), .core_acc_we(acc_we), .core_acc_addr(acc_addr), .core_acc_wdata(acc_wdata),
        .core_fwd_hit(fwd_hit), .core_fwd_data(fwd_data), .core_stall(stall), .core_restart(restart),
        .core_restart_sec(restart_sec), .core_restart_pc(restart_pc), .core_restart_ctx(restart_ctx),
        .core_cur_sec(cur_sec), .core_task_done(task_done),
        .cpu_wr_valid, .cpu_wr_addr, .mem_wr, .rep_seen, .rep_last, .task_rollbacks(trb), .wb_overflow(wb_ovf));

      nmp_core_model #(.NUM_SEC(NS), .G(GS[i]), .F_NMP(FS[i]), .N_TASKS(TASKS[i]), .K_LINES(16384), .SEED(i + 3)) core (
        .clk, .rst_n, .task_start, .start_pc, .start_ctx, .bp_mark, .bp_pc, .bp_ctx, .task_end,
        .acc_valid, .acc_we, .acc_addr, .acc_wdata, .stall, .restart, .restart_sec, .restart_pc,
        .task_done, .done, .cycles, .instrs, .rollbacks, .tasks_done);

      always_comb begin
        if (v == 0) begin
          done_m[i] = done; cyc_m[i] = cycles; ins_m[i] = instrs; rb_m[i] = rollbacks; td_m[i] = tasks_done;
        end else begin
          done_c[i] = done; cyc_c[i] = cycles; ins_c[i] = instrs; rb_c[i] = rollbacks; td_c[i] = tasks_done;
        end
      end
    end
  end

  function automatic bit all_done();
    for (int i = 0; i < NCFG; i++) if (!done_m[i] || !done_c[i]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum_ins_m, sum_ins_c;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!all_done()) @(posedge clk);
    sum_ins_m = 0; sum_ins_c = 0;
    for (int i = 0; i < NCFG; i++) begin
      $display("G=%0d f_nmp=0.%0d tasks=%0d | MRCN: %0d cycles, %0d instr, %0d rollbacks | whole-task: %0d cycles, %0d instr, %0d rollbacks",
               GS[i], FS[i] / 10, TASKS[i], cyc_m[i], ins_m[i], rb_m[i], cyc_c[i], ins_c[i], rb_c[i]);
      checks += 2;
      if (td_m[i] != TASKS[i]) begin failures++; $display("FAIL MRCN run %0d committed %0d tasks", i, td_m[i]); end
      if (td_c[i] != TASKS[i]) begin failures++; $display("FAIL whole-task run %0d committed %0d tasks", i, td_c[i]); end
      sum_ins_m += ins_m[i] - longint'(GS[i] * TASKS[i]);
      sum_ins_c += ins_c[i] - longint'(GS[i] * TASKS[i]);
    end
    $display("re-executed instructions: MRCN %0d, whole-task %0d", sum_ins_m, sum_ins_c);
    checks++;
    if (sum_ins_m > sum_ins_c) begin failures++; $display("FAIL MRCN re-executed more than whole-task rollback"); end
    checks++;
    if (cyc_m[5] > cyc_c[5]) begin failures++; $display("FAIL MRCN slower at G=500 f_nmp=0.9"); end
    checks++;
    if (rb_m[5] == 0) begin failures++; $display("FAIL no rollback at G=500 f_nmp=0.9"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
