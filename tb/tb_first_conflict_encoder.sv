// tb_first_conflict_encoder -- exhaustive test of the rollback-point priority
// encoder. Every conflict vector of NUM_SEC bits is applied; the expected
// rollback point is the index of the lowest set bit, computed here as
// $clog2(v & -v), independently of the encoder's loop.
module tb_first_conflict_encoder;
  localparam int NUM_SEC = 5;
  localparam int SEC_W   = 3;

  logic [NUM_SEC-1:0] vec;
  logic               any;
  logic [SEC_W-1:0]   first;
  int checks = 0, failures = 0;

  first_conflict_encoder #(.NUM_SEC(NUM_SEC)) dut (.conflict_vec(vec), .any, .first);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NUM_SEC-1:0] low;
    for (int v = 0; v < (1 << NUM_SEC); v++) begin
      vec = NUM_SEC'(v);
      #1;
      low = vec & (~vec + 1'b1);
      checks++;
      if (any !== (v != 0)) begin
        failures++;
        $display("FAIL any vec=%b any=%b", vec, any);
      end
      if (v != 0) begin
        checks++;
        if (int'(first) != $clog2(low)) begin
          failures++;
          $display("FAIL first vec=%b got=%0d exp=%0d", vec, first, $clog2(low));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
