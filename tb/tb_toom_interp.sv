// tb_toom_interp: multiplies random cubic polynomials (13-bit a, secret b
// in -4..4) by Toom-Cook evaluation, point-wise products and the
// interpolation pipeline, one index per cycle, and compares the seven
// product coefficients with the schoolbook product mod 2^13.  Checks the
// five-cycle pipeline latency.
module tb_toom_interp;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [6:0][15:0] w, z;
  logic out_valid;
  int checks = 0, failures = 0;
  int expv [100][7];
  int n_out = 0;
  int sent = 0, lat = 0, first_in = -1, first_out = -1, cyc = 0;

  always #5 clk = ~clk;
  toom_interp dut (.clk, .rst_n, .in_valid, .w, .out_valid, .z);

  function automatic int ev(int c [4], int k);
    case (k)
      0: return c[3];
      1: return c[0] + 2*c[1] + 4*c[2] + 8*c[3];
      2: return c[0] + c[1] + c[2] + c[3];
      3: return c[0] - c[1] + c[2] - c[3];
      4: return 8*c[0] + 4*c[1] + 2*c[2] + c[3];
      5: return 8*c[0] - 4*c[1] + 2*c[2] - c[3];
      default: return c[0];
    endcase
  endfunction

  // sample outputs at the falling edge, clear of the register updates
  always @(negedge clk) begin
    cyc++;
    if (out_valid) begin
      for (int k = 0; k < 7; k++) begin
        int e;
        e = expv[n_out][k];
        checks++;
        if (z[k][12:0] != 13'(e)) begin failures++; $display("FAIL z%0d got %h exp %h", k, z[k][12:0], 13'(e)); end
      end
      n_out++;
    end
  end

  // latency: clock edges from the edge that takes an input to the edge
  // that sees the matching output
  int pc = 0;
  always @(posedge clk) begin
    pc++;
    if (in_valid && first_in < 0) first_in = pc;
    if (out_valid && first_out < 0) first_out = pc;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int a [4], b [4], c [7];
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin a[i] = $urandom_range(8191); b[i] = int'($urandom_range(8)) - 4; end
      for (int k = 0; k < 7; k++) c[k] = 0;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) c[i+j] += a[i] * b[j];
      for (int k = 0; k < 7; k++) w[k] = 16'(ev(a, k) * ev(b, k));
      for (int k = 0; k < 7; k++) expv[t][k] = c[k];
      in_valid = 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != 100 || first_out - first_in != 5) begin
      failures++; $display("FAIL latency %0d outputs %0d", first_out - first_in, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
