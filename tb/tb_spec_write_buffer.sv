// tb_spec_write_buffer -- speculative store buffer at its default size (512
// entries, 8-cycle commit). A queue in the testbench mirrors the buffer:
// stores are appended in program order (or overwrite a same-section,
// same-address entry), a squash to section j drops every entry tagged >= j.
// Checked: load forwarding returns the youngest matching store, squash keeps
// exactly the older sections, commit takes exactly COMMIT_CYCLES cycles and
// the memory image it writes equals the model's, and a store to a full buffer
// raises overflow.
module tb_spec_write_buffer;
  import mrcn_pkg::*;
  localparam int NUM_SEC = 5, WB_DEPTH = 512, COMMIT_CYCLES = 8;
  localparam int LANES = WB_DEPTH / COMMIT_CYCLES;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, squash = 0, commit = 0;
  addr_t wr_addr = '0, ld_addr = '0;
  data_t wr_data = '0, ld_data;
  logic [2:0] wr_sec = '0, squash_sec = '0;
  logic ld_hit, commit_done, committing, full, overflow;
  logic [9:0] count;
  mem_wr_t [LANES-1:0] mem_wr;
  int checks = 0, failures = 0;

  typedef struct { addr_t a; data_t d; int s; } ent_t;
  ent_t q[$];
  data_t mem_img [addr_t];
  data_t exp_img [addr_t];

  always #5 clk = ~clk;

  spec_write_buffer #(.NUM_SEC(NUM_SEC), .WB_DEPTH(WB_DEPTH), .COMMIT_CYCLES(COMMIT_CYCLES)) dut (
    .clk, .rst_n, .wr_valid, .wr_addr, .wr_data, .wr_sec, .squash, .squash_sec,
    .ld_addr, .ld_hit, .ld_data, .commit, .mem_wr, .commit_done, .committing,
    .count, .full, .overflow);

  initial begin
    repeat (200000) @(posedge clk); #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic addr_t pick_addr();
    return addr_t'($urandom_range(0, 63) * 8 + 32'h1000_0000);
  endfunction

  task automatic store(addr_t a, data_t d, int s);
    int hit;
    hit = -1;
    foreach (q[i]) if (q[i].a == a && q[i].s == s) hit = i;
    if (hit >= 0) q[hit].d = d;
    else if (q.size() < WB_DEPTH) q.push_back('{a, d, s});
    wr_valid = 1; wr_addr = a; wr_data = d; wr_sec = 3'(s);
    @(posedge clk); #1;
    wr_valid = 0;
    #1;
  endtask

  task automatic check_load(addr_t a);
    int y;
    y = -1;
    foreach (q[i]) if (q[i].a == a) y = i;
    ld_addr = a;
    #1;
    checks++;
    if (ld_hit !== (y >= 0) || (y >= 0 && ld_data !== q[y].d)) begin
      failures++;
      $display("FAIL load %h hit=%b data=%h exp_hit=%0d", a, ld_hit, ld_data, y >= 0);
    end
  endtask

  task automatic check_count(string what);
    checks++;
    if (int'(count) != q.size()) begin
      failures++;
      $display("FAIL count %s: %0d exp %0d", what, count, q.size());
    end
  endtask

  task automatic do_squash(int j);
    squash = 1; squash_sec = 3'(j);
    @(posedge clk); #1;
    squash = 0;
    #1;
    for (int i = q.size() - 1; i >= 0; i--) if (q[i].s >= j) q.delete(i);
    check_count($sformatf("squash %0d", j));
  endtask

  task automatic do_commit();
    int cycles;
    bit done;
    mem_img.delete();
    exp_img.delete();
    foreach (q[i]) exp_img[q[i].a] = q[i].d;
    commit = 1;
    @(posedge clk); #1;
    commit = 0;
    cycles = 0;
    do begin
      cycles++;
      for (int l = 0; l < LANES; l++)
        if (mem_wr[l].valid) mem_img[mem_wr[l].addr] = mem_wr[l].data;
      done = commit_done;
      @(posedge clk); #1;
    end while (!done && cycles < 100);
    checks++;
    if (cycles != COMMIT_CYCLES) begin
      failures++;
      $display("FAIL commit took %0d cycles", cycles);
    end
    checks++;
    if (mem_img != exp_img) begin
      failures++;
      $display("FAIL committed image differs (%0d vs %0d addresses)", mem_img.size(), exp_img.size());
    end
    q.delete();
    #1;
    check_count("after commit");
  endtask

  initial begin
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    for (int round = 0; round < 6; round++) begin
      // execute sections 0..4 with random stores and loads
      for (int s = 0; s < NUM_SEC; s++)
        for (int n = 0; n < 20; n++) begin
          store(pick_addr(), {$urandom(), $urandom()}, s);
          check_load(pick_addr());
        end
      check_count("after stores");
      // roll back to a random section and re-execute from it
      begin
        int j;
        j = $urandom_range(0, NUM_SEC - 1);
        do_squash(j);
        for (int i = 0; i < 30; i++) check_load(pick_addr());
        for (int s = j; s < NUM_SEC; s++)
          for (int n = 0; n < 10; n++) store(pick_addr(), {$urandom(), $urandom()}, s);
      end
      do_commit();
    end
    // overflow: fill with distinct addresses, one more store overflows
    for (int n = 0; n < WB_DEPTH; n++) store(addr_t'(32'h2000_0000 + n * 8), data_t'(n), 0);
    checks++;
    if (!full || overflow) begin failures++; $display("FAIL full=%b overflow=%b", full, overflow); end
    store(32'h3000_0000, 64'd1, 0);
    checks++;
    if (!overflow) begin failures++; $display("FAIL overflow not raised"); end
    do_commit();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
