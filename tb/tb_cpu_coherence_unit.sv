// tb_cpu_coherence_unit -- host-side validation end to end. The testbench
// keeps its own list of the lines the CPU wrote in each window, builds NMP
// signatures with its own hash, and predicts the report: the earliest section
// whose filters hold a CPU-written line, or a whole-task rollback when the
// window held more than HIST_DEPTH distinct lines. CPU writes keep flowing
// during the check and must count for the next window. The report must come
// 10 cycles after the signature.
module tb_cpu_coherence_unit;
  import mrcn_pkg::*;
  import tb_sig_model::*;
  localparam int NUM_SEC = 5, SIG_BITS = 2048, SIG_HASHES = 4, HIST_DEPTH = 64, IDX_W = 11;

  logic clk = 0, rst_n = 0;
  logic cpu_wr_valid = 0, sig_valid = 0, rep_valid;
  addr_t cpu_wr_addr = '0;
  logic [NUM_SEC-1:0][SIG_BITS-1:0] sig_rd = '0, sig_wr = '0;
  report_t rep;
  int checks = 0, failures = 0;
  int n_conf = 0, n_clean = 0, n_ovf = 0;

  always #5 clk = ~clk;
  cpu_coherence_unit dut (.clk, .rst_n, .cpu_wr_valid, .cpu_wr_addr, .sig_valid, .sig_rd, .sig_wr, .rep_valid, .rep);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit window[line_t];
  int cpu_rate = 0;   // percent of cycles with a CPU write
  int pool_lo = 0, pool_n = 256;

  // CPU write generator; lines come from a small pool so NMP lines collide
  always @(posedge clk) begin
    #1;
    cpu_wr_valid = ($urandom_range(0, 99) < cpu_rate);
    cpu_wr_addr  = {line_t'(pool_lo + $urandom_range(0, pool_n - 1)), 6'($urandom())};
  end

  // window bookkeeping: writes sampled at a posedge; a write in the signature
  // cycle belongs to the next window
  bit frozen[line_t];
  always @(posedge clk) if (rst_n) begin
    if (sig_valid) begin frozen = window; window.delete(); end
    if (cpu_wr_valid) window[cpu_wr_addr[31:6]] = 1;
  end

  function automatic bit member(logic [SIG_BITS-1:0] sig, line_t ln);
    for (int k = 0; k < SIG_HASHES; k++) if (!sig[ref_hash(ln, k, IDX_W)]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      int t, exp_sec;
      bit exp_conf, exp_ovf;
      cpu_rate = (round % 3 == 0) ? 0 : (round % 3 == 1) ? 20 : 90;
      pool_n   = (round % 3 == 2) ? 4096 : 256;
      pool_lo  = (round % 3 == 2) ? (1 << 20) : 0;   // burst lines never match the NMP lines
      repeat ($urandom_range(40, 120)) @(posedge clk);
      #2;
      sig_rd = '0; sig_wr = '0;
      for (int s = 0; s < NUM_SEC; s++)
        for (int n = 0; n < 10; n++) begin
          line_t ln;
          ln = line_t'($urandom_range(0, 255));
          for (int k = 0; k < SIG_HASHES; k++)
            if (n % 2) sig_wr[s][ref_hash(ln, k, IDX_W)] = 1'b1;
            else       sig_rd[s][ref_hash(ln, k, IDX_W)] = 1'b1;
        end
      sig_valid = 1;
      @(posedge clk); #2;
      sig_valid = 0;
      exp_ovf = (frozen.size() > HIST_DEPTH);
      exp_conf = exp_ovf; exp_sec = 0;
      if (!exp_ovf)
        for (int s = NUM_SEC - 1; s >= 0; s--)
          foreach (frozen[ln]) if (member(sig_rd[s], ln) || member(sig_wr[s], ln)) begin exp_conf = 1; exp_sec = s; end
      t = 1;
      while (!rep_valid && t < 60) begin @(posedge clk); #2; t++; end
      checks += 2;
      if (t != 10) begin failures++; $display("FAIL report after %0d cycles", t); end
      if (rep.conflict !== exp_conf || rep.ovf !== exp_ovf || (exp_conf && int'(rep.sec) != exp_sec)) begin
        failures++;
        $display("FAIL round %0d rep conf=%b ovf=%b sec=%0d exp conf=%b ovf=%b sec=%0d (window %0d lines)",
                 round, rep.conflict, rep.ovf, rep.sec, exp_conf, exp_ovf, exp_sec, frozen.size());
      end
      if (exp_ovf) n_ovf++; else if (exp_conf) n_conf++; else n_clean++;
    end
    checks++;
    if (n_ovf == 0 || n_conf == 0 || n_clean == 0) begin
      failures++;
      $display("FAIL cases not all exercised: ovf=%0d conflict=%0d clean=%0d", n_ovf, n_conf, n_clean);
    end
    $display("cases: overflow=%0d conflict=%0d clean=%0d", n_ovf, n_conf, n_clean);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
