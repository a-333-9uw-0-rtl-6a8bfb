// tb_sm_to_2c: exhaustive test of the sign-magnitude to two's complement
// decoder over all 16 codes.
module tb_sm_to_2c;
  logic [3:0] sm;
  logic [7:0] tc;
  int checks = 0, failures = 0;
  sm_to_2c #(.OW(8)) dut (.sm, .tc);
  initial begin
    for (int i = 0; i < 16; i++) begin
      int e;
      sm = 4'(i);
      #1;
      e = (i >= 8) ? -(i - 8) : i;
      checks++;
      if ($signed(tc) != e) begin failures++; $display("FAIL code %0d -> %0d", i, $signed(tc)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
