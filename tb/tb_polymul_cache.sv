// tb_polymul_cache: fills the 96x112 A/B array and the 64x112 C array with
// random words, reads them back on every port against a shadow copy and
// checks the one-cycle read latency.
module tb_polymul_cache;
  logic clk = 0;
  logic ab0_en = 0, ab0_we = 0, ab1_en = 0, c_re = 0, c_we = 0;
  logic [6:0] ab0_addr = '0, ab1_addr = '0;
  logic [5:0] c_raddr = '0, c_waddr = '0;
  logic [111:0] ab0_wdata = '0, c_wdata = '0, ab0_rdata, ab1_rdata, c_rdata;
  logic [111:0] sab [96], sc [64];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  polymul_cache dut (.*);

  function automatic logic [111:0] r112();
    return {$urandom(), $urandom(), $urandom(), 16'($urandom())};
  endfunction
  task automatic chk(input logic ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    for (int i = 0; i < 96; i++) begin
      @(negedge clk);
      sab[i] = r112(); ab0_en = 1; ab0_we = 1; ab0_addr = 7'(i); ab0_wdata = sab[i];
      if (i < 64) begin sc[i] = r112(); c_we = 1; c_waddr = 6'(i); c_wdata = sc[i]; end
      else c_we = 0;
    end
    @(negedge clk); ab0_en = 0; ab0_we = 0; c_we = 0;
    for (int t = 0; t < 200; t++) begin
      int x, y, z;
      x = $urandom_range(95); y = $urandom_range(95); z = $urandom_range(63);
      @(negedge clk);
      ab0_en = 1; ab0_addr = 7'(x); ab1_en = 1; ab1_addr = 7'(y); c_re = 1; c_raddr = 6'(z);
      @(negedge clk);
      ab0_en = 0; ab1_en = 0; c_re = 0;
      chk(ab0_rdata == sab[x], "ab port 0");
      chk(ab1_rdata == sab[y], "ab port 1");
      chk(c_rdata == sc[z], "c read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
