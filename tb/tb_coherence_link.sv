// tb_coherence_link -- sends messages through the link at the default
// latency (18) and at latency 3, and checks the payload and that it is
// delivered exactly LAT cycles after being offered, with busy high while the
// message is in flight.
module tb_coherence_link;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [15:0] in_msg = '0;
  logic out_valid_a, out_valid_b, busy_a, busy_b;
  logic [15:0] out_a, out_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  coherence_link #(.W(16))          dut_a (.clk, .rst_n, .in_valid, .in_msg, .out_valid(out_valid_a), .out_msg(out_a), .busy(busy_a));
  coherence_link #(.W(16), .LAT(3)) dut_b (.clk, .rst_n, .in_valid, .in_msg, .out_valid(out_valid_b), .out_msg(out_b), .busy(busy_b));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      int ta, tb_, t;
      logic [15:0] m;
      m = 16'($urandom());
      @(negedge clk);
      in_valid = 1; in_msg = m;
      @(negedge clk);
      in_valid = 0; in_msg = ~m;
      ta = -1; tb_ = -1; t = 1;
      checks++;
      if (!busy_a) begin failures++; $display("FAIL busy"); end
      while (ta < 0 && t < 40) begin
        if (out_valid_a && ta < 0) begin ta = t; checks++; if (out_a !== m) begin failures++; $display("FAIL payload a"); end end
        if (out_valid_b && tb_ < 0) begin tb_ = t; checks++; if (out_b !== m) begin failures++; $display("FAIL payload b"); end end
        @(negedge clk); t++;
      end
      checks += 2;
      if (ta != 18) begin failures++; $display("FAIL latency a=%0d", ta); end
      if (tb_ != 3) begin failures++; $display("FAIL latency b=%0d", tb_); end
      checks++;
      if (busy_a) begin failures++; $display("FAIL busy after delivery"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
