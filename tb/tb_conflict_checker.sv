// tb_conflict_checker -- builds random per-section signatures from random NMP
// line sets with the testbench's own hash, a random CPU write record that
// partly reuses those lines, and compares the checker's per-section result
// with a membership test computed here. Two instances cover
// CHECK_NMP_READS=1 (reads and writes conflict) and 0 (writes only). The
// check must finish in HIST_DEPTH/CHECK_LANES+1 = 9 cycles.
module tb_conflict_checker;
  import mrcn_pkg::*;
  import tb_sig_model::*;
  localparam int NUM_SEC = 5, SIG_BITS = 2048, SIG_HASHES = 4, HIST_DEPTH = 64, CHECK_LANES = 8, IDX_W = 11;
  localparam int BEATS = HIST_DEPTH / CHECK_LANES;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NUM_SEC-1:0][SIG_BITS-1:0] rd_sig, wr_sig;
  line_t [HIST_DEPTH-1:0] lines;
  logic  [HIST_DEPTH-1:0] valid;
  logic busy_a, done_a, busy_b, done_b;
  logic [NUM_SEC-1:0] vec_a, vec_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  conflict_checker #(.CHECK_NMP_READS(1'b1)) dut_a (.clk, .rst_n, .start, .rd_sig, .wr_sig, .lines, .valid,
                                                   .busy(busy_a), .done(done_a), .conflict_vec(vec_a));
  conflict_checker #(.CHECK_NMP_READS(1'b0)) dut_b (.clk, .rst_n, .start, .rd_sig, .wr_sig, .lines, .valid,
                                                   .busy(busy_b), .done(done_b), .conflict_vec(vec_b));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit member(logic [SIG_BITS-1:0] sig, line_t ln);
    for (int k = 0; k < SIG_HASHES; k++) if (!sig[ref_hash(ln, k, IDX_W)]) return 0;
    return 1;
  endfunction

  int nonzero = 0, multi = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 200; round++) begin
      line_t pool[$];
      logic [NUM_SEC-1:0] exp_a, exp_b;
      int t;
      rd_sig = '0; wr_sig = '0; valid = '0; lines = '0;
      pool.delete();
      for (int s = 0; s < NUM_SEC; s++) begin
        int cnt;
        cnt = $urandom_range(0, 12);
        for (int n = 0; n < cnt; n++) begin
          line_t ln;
          ln = line_t'({$urandom(), $urandom()});
          pool.push_back(ln);
          for (int k = 0; k < SIG_HASHES; k++)
            if ($urandom_range(0, 1)) wr_sig[s][ref_hash(ln, k, IDX_W)] = 1'b1;
            else                      rd_sig[s][ref_hash(ln, k, IDX_W)] = 1'b1;
          // make each line a clean member of one filter
          if ($urandom_range(0, 1)) for (int k = 0; k < SIG_HASHES; k++) wr_sig[s][ref_hash(ln, k, IDX_W)] = 1'b1;
          else                      for (int k = 0; k < SIG_HASHES; k++) rd_sig[s][ref_hash(ln, k, IDX_W)] = 1'b1;
        end
      end
      for (int e = 0; e < HIST_DEPTH; e++) begin
        valid[e] = ($urandom_range(0, 3) != 0);
        if (pool.size() > 0 && $urandom_range(0, 30) == 0) lines[e] = pool[$urandom_range(0, pool.size() - 1)];
        else lines[e] = line_t'({$urandom(), $urandom()});
      end
      exp_a = '0; exp_b = '0;
      for (int s = 0; s < NUM_SEC; s++)
        for (int e = 0; e < HIST_DEPTH; e++) if (valid[e]) begin
          if (member(wr_sig[s], lines[e])) begin exp_a[s] = 1; exp_b[s] = 1; end
          if (member(rd_sig[s], lines[e])) exp_a[s] = 1;
        end
      if (exp_a != 0) nonzero++;
      if ($countones(exp_a) > 1) multi++;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      t = 1;
      while (!done_a && t < 50) begin @(posedge clk); #1; t++; end
      checks += 3;
      if (t != BEATS + 1) begin failures++; $display("FAIL check took %0d cycles", t); end
      if (vec_a !== exp_a) begin failures++; $display("FAIL reads+writes got %b exp %b", vec_a, exp_a); end
      if (vec_b !== exp_b) begin failures++; $display("FAIL writes only got %b exp %b", vec_b, exp_b); end
      @(posedge clk); #1;
    end
    checks++;
    if (nonzero < 20 || multi < 5) begin failures++; $display("FAIL too few conflicts exercised: %0d %0d", nonzero, multi); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
