// tb_granularity_sweep -- the granularity study of the evaluation, run on the RTL.
//
// Offloaded blocks of 10, 50, 250 and 1000 instructions (the 100 and
// 500-instruction sizes are in tb_synthetic_sweep) at NMP shared-memory
// fractions f_nmp of 0.1 and 0.9. As in tb_synthetic_sweep, a behavioural core
// runs a series of tasks on two copies of the design fed by one CPU write
// stream: MRCN with 5 rollback points of 2048-bit filters, and the same
// hardware with a single rollback point (whole-task re-execution, as CONDA
// does) whose one filter pair is 8192 bits, about the same storage. With only
// 2048 bits, that one filter fills up at 1000 instructions and nearly every
// check reports a false conflict. The CPU writes a
// random line of a 16384-line shared region in 2% of cycles; 30% of the
// core's shared accesses are stores. These rates are assumptions of this
// testbench, not numbers from the paper. At 1000 instructions and f_nmp = 0.9
// that is about 270 stores per task, within the 512-entry write buffer.
//
// Checked: every task of every run commits with no write-buffer overflow;
// summed over all runs MRCN re-executes no more instructions than whole-task
// rollback; at 1000 instructions and f_nmp = 0.9 MRCN takes no more cycles.
// The cycle counts of all runs are printed.
module tb_granularity_sweep;
  import mrcn_pkg::*;

  localparam int NCFG = 8;
  localparam int GS [NCFG] = '{10, 10, 50, 50, 250, 250, 1000, 1000};
  localparam int FS [NCFG] = '{10, 90, 10, 90, 10, 90, 10, 90};
  localparam int TASKS [NCFG] = '{40, 40, 24, 24, 12, 12, 4, 4};

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
  int     ovf_m [NCFG], ovf_c [NCFG];

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    for (genvar v = 0; v < 2; v++) begin : g_var
      localparam int NS = (v == 0) ? 5 : 1;
      localparam int SW = (NS > 1) ? $clog2(NS) : 1;
      // the single-section copy gets about the filter storage of five sections
      localparam int SB = (v == 0) ? 2048 : 8192;
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
      int ovf_n = 0;

      always_ff @(posedge clk) if (rst_n && wb_ovf) ovf_n <= ovf_n + 1;

      mrcn_top #(.NUM_SEC(NS), .SIG_BITS(SB)) dut (
        .clk, .rst_n,
        .core_task_start(task_start), .core_start_pc(start_pc), .core_start_ctx(start_ctx),
        .core_bp_mark(bp_mark), .core_bp_pc(bp_pc), .core_bp_ctx(bp_ctx), .core_task_end(task_end),
        .core_acc_valid(acc_valid), .core_acc_we(acc_we), .core_acc_addr(acc_addr), .core_acc_wdata(acc_wdata),
        .core_fwd_hit(fwd_hit), .core_fwd_data(fwd_data), .core_stall(stall), .core_restart(restart),
        .core_restart_sec(restart_sec), .core_restart_pc(restart_pc), .core_restart_ctx(restart_ctx),
        .core_cur_sec(cur_sec), .core_task_done(task_done),
        .cpu_wr_valid, .cpu_wr_addr, .mem_wr, .rep_seen, .rep_last, .task_rollbacks(trb), .wb_overflow(wb_ovf));

      nmp_core_model #(.NUM_SEC(NS), .G(GS[i]), .F_NMP(FS[i]), .N_TASKS(TASKS[i]), .K_LINES(16384), .SEED(i + 11)) core (
        .clk, .rst_n, .task_start, .start_pc, .start_ctx, .bp_mark, .bp_pc, .bp_ctx, .task_end,
        .acc_valid, .acc_we, .acc_addr, .acc_wdata, .stall, .restart, .restart_sec, .restart_pc,
        .task_done, .done, .cycles, .instrs, .rollbacks, .tasks_done);

      always_comb begin
        if (v == 0) begin
          done_m[i] = done; cyc_m[i] = cycles; ins_m[i] = instrs; rb_m[i] = rollbacks; td_m[i] = tasks_done; ovf_m[i] = ovf_n;
        end else begin
          done_c[i] = done; cyc_c[i] = cycles; ins_c[i] = instrs; rb_c[i] = rollbacks; td_c[i] = tasks_done; ovf_c[i] = ovf_n;
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
    for (int i = 0; i < NCFG; i++)
      $display("  run %0d: MRCN %0d/%0d tasks %0d rollbacks, whole-task %0d/%0d tasks %0d rollbacks",
               i, td_m[i], TASKS[i], rb_m[i], td_c[i], TASKS[i], rb_c[i]);
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
      checks++;
      if (ovf_m[i] != 0 || ovf_c[i] != 0) begin failures++; $display("FAIL write buffer overflow in run %0d", i); end
      sum_ins_m += ins_m[i] - longint'(GS[i] * TASKS[i]);
      sum_ins_c += ins_c[i] - longint'(GS[i] * TASKS[i]);
    end
    $display("re-executed instructions: MRCN %0d, whole-task %0d", sum_ins_m, sum_ins_c);
    checks++;
    if (sum_ins_m > sum_ins_c) begin failures++; $display("FAIL MRCN re-executed more than whole-task rollback"); end
    checks++;
    if (cyc_m[7] > cyc_c[7]) begin failures++; $display("FAIL MRCN slower at G=1000 f_nmp=0.9"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
