// tb_mrcn_top -- end-to-end test of the MRCN hardware at its default size.
//
// A behavioural near-memory core runs offloaded tasks of 100 and 500
// instructions (the two block sizes of the evaluation), cut into 5 equal
// sections by breakpoints. Each instruction is a memory access with
// probability F_NMP percent; its address, kind and data are a hash of (task,
// position, attempt), so a re-execution replays the same accesses with fresh
// store data. A host CPU stream writes lines of the same shared region at a
// rate that changes from task to task: none (clean commit), light and medium
// (conflicts in one or several sections) and a heavy burst over many lines
// (write-record overflow, whole-task rollback).
//
// Reference model, kept in the testbench:
//   * per-section Bloom filters built with the testbench's hash, and the exact
//     line sets, of the accesses since the last signature;
//   * the CPU's written lines per validation window;
//   * the predicted report (first section whose filters hold a CPU line, or
//     section 0 on overflow) -- the restart section, PC and context must match,
//     and the section may never be later than the first truly conflicting one;
//   * the speculative stores per section -- loads must be forwarded the
//     youngest one, and the memory image written at commit must equal it.
// Timing: signature-to-report within 40-50 cycles, commit in 8 cycles.
// Every mechanism must occur at least once: clean commit, rollback to a later
// section, rollback to section 0 on a real conflict, overflow rollback,
// several sections conflicting at once, repeated rollback of one task, load
// forwarding, same-section store coalescing, core stall.
module tb_mrcn_top;
  import mrcn_pkg::*;
  import tb_sig_model::*;

  localparam int NUM_SEC = 5, SIG_BITS = 2048, SIG_HASHES = 4, IDX_W = 11, HIST_DEPTH = 64;
  localparam int LANES = 64;
  localparam int N_TASKS = 40;
  localparam int F_NMP = 50;           // percent of instructions that access memory
  localparam int K_LINES = 512;        // shared region, in lines
  localparam addr_t BASE = 32'h4000_0000;

  logic clk = 0, rst_n = 0;
  logic core_task_start = 0, core_bp_mark = 0, core_task_end = 0;
  logic [31:0] core_start_pc = '0, core_bp_pc = '0;
  logic [63:0] core_start_ctx = '0, core_bp_ctx = '0;
  logic core_acc_valid = 0, core_acc_we = 0;
  addr_t core_acc_addr = '0;
  data_t core_acc_wdata = '0;
  logic core_fwd_hit, core_stall, core_restart, core_task_done, rep_seen, wb_overflow;
  data_t core_fwd_data;
  logic [2:0] core_restart_sec, core_cur_sec;
  logic [31:0] core_restart_pc;
  logic [63:0] core_restart_ctx;
  logic cpu_wr_valid = 0;
  addr_t cpu_wr_addr = '0;
  mem_wr_t [LANES-1:0] mem_wr;
  report_t rep_last;
  logic [7:0] task_rollbacks;

  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  mrcn_top dut (
    .clk, .rst_n,
    .core_task_start, .core_start_pc, .core_start_ctx, .core_bp_mark, .core_bp_pc, .core_bp_ctx,
    .core_task_end, .core_acc_valid, .core_acc_we, .core_acc_addr, .core_acc_wdata,
    .core_fwd_hit, .core_fwd_data, .core_stall, .core_restart, .core_restart_sec,
    .core_restart_pc, .core_restart_ctx, .core_cur_sec, .core_task_done,
    .cpu_wr_valid, .cpu_wr_addr, .mem_wr, .rep_seen, .rep_last, .task_rollbacks, .wb_overflow);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned mix(int unsigned a, int unsigned b, int unsigned c);
    int unsigned x;
    x = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 13);
    return x;
  endfunction

  function automatic bit member(logic [SIG_BITS-1:0] sig, line_t ln);
    for (int k = 0; k < SIG_HASHES; k++) if (!sig[ref_hash(ln, k, IDX_W)]) return 0;
    return 1;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_clean = 0, n_roll_mid = 0, n_roll_zero = 0, n_roll_ovf = 0, n_multi = 0, n_repeat = 0;
  int n_fwd = 0, n_coalesce = 0, n_stall = 0, n_false_pos = 0, n_tasks_done = 0;
  int rt_min = 1000, rt_max = 0;

  // ---------------- reference state ----------------
  logic [NUM_SEC-1:0][SIG_BITS-1:0] m_rd, m_wr;
  bit m_lines[NUM_SEC][line_t];
  logic [NUM_SEC-1:0][SIG_BITS-1:0] s_rd, s_wr;   // as last sent
  bit s_lines[NUM_SEC][line_t];
  bit cpu_window[line_t];
  bit cpu_frozen[line_t];
  int exp_sec;  bit exp_conf, exp_ovf;
  typedef struct { addr_t a; data_t d; int s; } st_t;
  st_t spec[$];
  data_t mem_img[addr_t];

  // CPU write stream
  int cpu_rate = 0;        // writes per 1000 cycles
  int cpu_pool = K_LINES;
  always @(posedge clk) begin
    #1;
    cpu_wr_valid = ($urandom_range(0, 999) < cpu_rate);
    cpu_wr_addr  = BASE + addr_t'($urandom_range(0, cpu_pool - 1) * 64 + $urandom_range(0, 7) * 8);
  end

  // validation windows, as the CPU side forms them, and the predicted report
  always @(posedge clk) if (rst_n) begin
    if (dut.cpu_sig_valid) begin
      cpu_frozen = cpu_window;
      cpu_window.delete();
      exp_ovf  = (cpu_frozen.size() > HIST_DEPTH);
      exp_conf = exp_ovf;
      exp_sec  = 0;
      if (!exp_ovf) begin
        int nconf, exact_first;
        nconf = 0; exact_first = NUM_SEC;
        for (int s = NUM_SEC - 1; s >= 0; s--) begin
          bit c;
          c = 0;
          foreach (cpu_frozen[ln]) begin
            if (member(s_rd[s], ln) || member(s_wr[s], ln)) c = 1;
            if (s_lines[s].exists(ln)) exact_first = s;
          end
          if (c) begin exp_conf = 1; exp_sec = s; nconf++; end
        end
        if (nconf > 1) n_multi++;
        if (exp_conf && exp_sec < exact_first) n_false_pos++;
        checks++;
        if (exact_first < NUM_SEC && !(exp_conf && exp_sec <= exact_first)) begin
          failures++;
          $display("FAIL model: true conflict in section %0d missed", exact_first);
        end
      end
    end
    if (cpu_wr_valid) cpu_window[line_of(cpu_wr_addr)] = 1;
  end

  // commit port into the memory image
  int commit_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    bit any;
    any = 0;
    for (int l = 0; l < LANES; l++)
      if (mem_wr[l].valid) begin mem_img[mem_wr[l].addr] = mem_wr[l].data; any = 1; end
    if (dut.u_wb.committing) commit_cycles++;
    if (core_stall) n_stall++;
  end

  // ---------------- the core ----------------
  task automatic tick();
    @(posedge clk); #2;
    core_task_start = 0; core_bp_mark = 0; core_task_end = 0; core_acc_valid = 0; core_acc_we = 0;
  endtask

  task automatic clear_model();
    m_rd = '0; m_wr = '0;
    for (int s = 0; s < NUM_SEC; s++) m_lines[s].delete();
  endtask

  task automatic run_task(int tid, int g, int rate, int pool);
    int pos, csec, attempt, t_end, t_rep, bound[NUM_SEC + 1];
    bit done;
    for (int s = 0; s <= NUM_SEC; s++) bound[s] = s * g / NUM_SEC;
    spec.delete();
    clear_model();
    cpu_rate = rate; cpu_pool = pool;
    pos = 0; csec = 0; attempt = 0; done = 0;
    core_task_start = 1; core_start_pc = 0; core_start_ctx = {32'(tid), 32'd0};
    tick();
    while (!done) begin
      // ---- execute until the end-of-task macro ----
      while (pos < g || csec < NUM_SEC - 1 && pos == bound[csec + 1]) begin
        if (csec < NUM_SEC - 1 && pos == bound[csec + 1]) begin
          csec++;
          core_bp_mark = 1; core_bp_pc = 32'(pos); core_bp_ctx = {32'(tid), 32'(csec)};
        end else begin
          int unsigned h;
          h = mix(tid, pos, 7);
          if (h % 100 < F_NMP) begin
            line_t ln;
            addr_t a;
            bit we;
            // some positions repeat the address of the previous access
            a  = BASE + addr_t'((mix(tid, (h % 5 == 0) ? pos - 1 : pos, 11) % K_LINES) * 64 + (h % 3) * 8);
            we = h[20];
            ln = line_of(a);
            core_acc_valid = 1; core_acc_we = we; core_acc_addr = a;
            core_acc_wdata = {32'(tid), 16'(attempt), 16'(pos)};
            #1;
            if (we) begin
              int hit;
              hit = -1;
              foreach (spec[i]) if (spec[i].a == a && spec[i].s == csec) hit = i;
              if (hit >= 0) begin spec[hit].d = core_acc_wdata; n_coalesce++; end
              else spec.push_back('{a, core_acc_wdata, csec});
              for (int k = 0; k < SIG_HASHES; k++) m_wr[csec][ref_hash(ln, k, IDX_W)] = 1'b1;
            end else begin
              int y;
              y = -1;
              foreach (spec[i]) if (spec[i].a == a) y = i;
              checks++;
              if (core_fwd_hit !== (y >= 0) || (y >= 0 && core_fwd_data !== spec[y].d)) begin
                failures++;
                $display("FAIL forward task %0d pos %0d hit=%b", tid, pos, core_fwd_hit);
              end
              if (y >= 0) n_fwd++;
              for (int k = 0; k < SIG_HASHES; k++) m_rd[csec][ref_hash(ln, k, IDX_W)] = 1'b1;
            end
            m_lines[csec][ln] = 1;
          end
          pos++;
        end
        tick();
      end
      core_task_end = 1;
      t_end = cycle;
      s_rd = m_rd; s_wr = m_wr;
      for (int s = 0; s < NUM_SEC; s++) s_lines[s] = m_lines[s];
      tick();
      clear_model();   // signatures are sent and cleared
      // ---- wait for the report ----
      while (!dut.u_ctrl.rep_valid) tick();
      t_rep = cycle;
      if (t_rep - t_end < rt_min) rt_min = t_rep - t_end;
      if (t_rep - t_end > rt_max) rt_max = t_rep - t_end;
      checks++;
      if (t_rep - t_end < 40 || t_rep - t_end > 50) begin
        failures++;
        $display("FAIL round trip %0d cycles", t_rep - t_end);
      end
      tick();
      if (core_restart) begin
        checks++;
        if (!exp_conf || int'(core_restart_sec) != exp_sec || int'(core_restart_pc) != bound[exp_sec]
            || core_restart_ctx != {32'(tid), 32'(exp_sec)} || rep_last.ovf !== exp_ovf) begin
          failures++;
          $display("FAIL task %0d restart sec=%0d pc=%0d ovf=%b, expected conflict=%b sec=%0d ovf=%b",
                   tid, core_restart_sec, core_restart_pc, rep_last.ovf, exp_conf, exp_sec, exp_ovf);
        end
        if (exp_ovf) n_roll_ovf++; else if (exp_sec == 0) n_roll_zero++; else n_roll_mid++;
        if (attempt == 1) n_repeat++;
        attempt++;
        for (int i = spec.size() - 1; i >= 0; i--) if (spec[i].s >= int'(core_restart_sec)) spec.delete(i);
        pos = int'(core_restart_pc); csec = int'(core_restart_sec);
        if (attempt >= 3) cpu_rate = 0;     // let the task finish
        if (exp_ovf) begin cpu_rate = 0; end
      end else begin
        int c0;
        checks++;
        if (exp_conf) begin failures++; $display("FAIL task %0d committed despite expected conflict", tid); end
        c0 = commit_cycles;
        while (!core_task_done) begin
          checks++;
          if (!core_stall) begin failures++; $display("FAIL core not stalled during commit"); end
          tick();
        end
        tick();
        checks++;
        if (commit_cycles - c0 != 8) begin failures++; $display("FAIL commit took %0d cycles", commit_cycles - c0); end
        // the memory now holds the youngest store of every address of the task
        begin
          data_t last[addr_t];
          foreach (spec[i]) last[spec[i].a] = spec[i].d;
          foreach (last[a]) begin
            checks++;
            if (!mem_img.exists(a) || mem_img[a] !== last[a]) begin
              failures++;
              $display("FAIL task %0d memory at %h", tid, a);
            end
          end
        end
        if (attempt == 0) n_clean++;
        n_tasks_done++;
        done = 1;
      end
    end
  endtask

  initial begin
    clear_model();
    repeat (3) @(posedge clk);
    #2 rst_n = 1;
    tick();
    for (int tid = 1; tid <= N_TASKS; tid++) begin
      int g, rate, pool;
      g = (tid % 2) ? 100 : 500;
      case (tid % 4)
        0: begin rate = 0;   pool = K_LINES; end        // quiet CPU
        1: begin rate = 30;  pool = K_LINES; end        // light sharing
        2: begin rate = 120; pool = K_LINES; end        // medium sharing
        default: begin rate = 900; pool = 1 << 16; end  // write burst over many lines
      endcase
      // a quiet gap lets the previous window drain
      cpu_rate = 0;
      repeat (60) tick();
      run_task(tid, g, rate, pool);
    end
    $display("tasks=%0d clean=%0d roll_mid=%0d roll_zero=%0d roll_ovf=%0d multi=%0d repeat=%0d fwd=%0d coalesce=%0d stall=%0d false_pos=%0d round_trip=%0d..%0d",
             n_tasks_done, n_clean, n_roll_mid, n_roll_zero, n_roll_ovf, n_multi, n_repeat, n_fwd, n_coalesce, n_stall, n_false_pos, rt_min, rt_max);
    checks++; if (n_tasks_done != N_TASKS) begin failures++; $display("FAIL tasks done %0d", n_tasks_done); end
    checks++; if (n_clean == 0)     begin failures++; $display("FAIL no clean commit"); end
    checks++; if (n_roll_mid == 0)  begin failures++; $display("FAIL no rollback to a later section"); end
    checks++; if (n_roll_zero == 0) begin failures++; $display("FAIL no rollback to section 0"); end
    checks++; if (n_roll_ovf == 0)  begin failures++; $display("FAIL no overflow rollback"); end
    checks++; if (n_multi == 0)     begin failures++; $display("FAIL no multi-section conflict"); end
    checks++; if (n_repeat == 0)    begin failures++; $display("FAIL no repeated rollback"); end
    checks++; if (n_fwd == 0)       begin failures++; $display("FAIL no load forwarding"); end
    checks++; if (n_coalesce == 0)  begin failures++; $display("FAIL no store coalescing"); end
    checks++; if (n_stall == 0)     begin failures++; $display("FAIL no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
