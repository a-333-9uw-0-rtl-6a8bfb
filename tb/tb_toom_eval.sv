// tb_toom_eval: checks the seven evaluation points against direct
// evaluation of a0 + a1 z + a2 z^2 + a3 z^3 (the half points scaled by 8)
// for random 16-bit inputs.
module tb_toom_eval;
  logic [3:0][15:0] a;
  logic [6:0][15:0] aw;
  int checks = 0, failures = 0;
  toom_eval #(.W(16)) dut (.a, .aw);
  initial begin
    for (int t = 0; t < 200; t++) begin
      int x0, x1, x2, x3;
      int e [7];
      x0 = $urandom_range(65535); x1 = $urandom_range(65535);
      x2 = $urandom_range(65535); x3 = $urandom_range(65535);
      a = {16'(x3), 16'(x2), 16'(x1), 16'(x0)};
      #1;
      e[0] = x3;
      e[1] = x0 + 2*x1 + 4*x2 + 8*x3;
      e[2] = x0 + x1 + x2 + x3;
      e[3] = x0 - x1 + x2 - x3;
      e[4] = 8*x0 + 4*x1 + 2*x2 + x3;
      e[5] = 8*x0 - 4*x1 + 2*x2 - x3;
      e[6] = x0;
      for (int k = 0; k < 7; k++) begin
        checks++;
        if (aw[k] != 16'(e[k])) begin failures++; $display("FAIL point %0d", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
