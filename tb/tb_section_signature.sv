// tb_section_signature -- checks that each NMP access sets exactly the hash
// bits of its line in the filter of its section and kind (read/write), that
// no other filter changes, that a line is always a member after insertion,
// and that clear empties every filter. Expected bits come from the
// testbench's own hash model.
module tb_section_signature;
  import mrcn_pkg::*;
  import tb_sig_model::*;
  localparam int NUM_SEC = 5, SIG_BITS = 2048, SIG_HASHES = 4, IDX_W = 11;

  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, ins_we = 0, clear = 0;
  addr_t ins_addr = '0;
  logic [2:0] ins_sec = '0;
  logic [NUM_SEC-1:0][SIG_BITS-1:0] rd_sig, wr_sig, rd_exp, wr_exp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  section_signature dut (
    .clk, .rst_n, .ins_valid, .ins_we, .ins_addr, .ins_sec, .clear, .rd_sig, .wr_sig);

  initial begin
    repeat (5000) @(posedge clk); #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    checks++;
    if (rd_sig !== rd_exp || wr_sig !== wr_exp) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    rd_exp = '0; wr_exp = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    compare("after reset");
    for (int n = 0; n < 300; n++) begin
      logic [25:0] ln;
      int s;
      logic we;
      ins_addr  = $urandom();
      ins_we    = $urandom_range(0, 1);
      ins_sec   = 3'($urandom_range(0, NUM_SEC - 1));
      ins_valid = 1;
      ln = ins_addr[31:6]; s = int'(ins_sec); we = ins_we;
      @(posedge clk); #1;
      ins_valid = 0;
      for (int k = 0; k < SIG_HASHES; k++) begin
        if (we) wr_exp[s][ref_hash(ln, k, IDX_W)] = 1'b1;
        else    rd_exp[s][ref_hash(ln, k, IDX_W)] = 1'b1;
      end
      #1;
      compare($sformatf("insert %0d", n));
      checks++;
      for (int k = 0; k < SIG_HASHES; k++)
        if (!(we ? wr_sig[s][ref_hash(ln, k, IDX_W)] : rd_sig[s][ref_hash(ln, k, IDX_W)])) begin
          failures++;
          $display("FAIL member after insert %0d", n);
          break;
        end
      if (n == 150) begin
        clear = 1;
        @(posedge clk); #1;
        clear = 0;
        rd_exp = '0; wr_exp = '0;
        #1;
        compare("clear");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
