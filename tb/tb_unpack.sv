// tb_unpack: unpacks 256 random 10-bit coefficients and compares every lane.
// Ends with a TB_RESULT line; a watchdog stops it if `done` never comes.
module tb_unpack;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] off1 = '0, off2 = '0;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  unpack dut (.clk, .rst_n, .start, .off1, .off2, .a_req, .a_rdata, .b_req, .b_rdata, .done);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // start the unit and return the number of cycles until done
  task automatic run(input int o1, input int o2, output int cyc);
    off1 = AW'(o1); off2 = AW'(o2);
    cyc = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
  endtask

  function automatic logic [63:0] rnd64();
    return {$urandom(), $urandom()};
  endfunction

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;

    begin
      logic [2559:0] bits;
      int c [256];
      for (int i = 0; i < 256; i++) begin c[i] = $urandom_range(1023); bits[10*i +: 10] = 10'(c[i]); end
      for (int w = 0; w < 40; w++) u_mem.mem[30 + w] = bits[64*w +: 64];
      run(30, 200, cyc);
      for (int i = 0; i < 256; i++) check(u_mem.mem[200 + i/4][16*(i%4) +: 16] == 16'(c[i]), $sformatf("coef %0d", i));
      check(cyc >= 64 && cyc <= 70, $sformatf("cycles %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
