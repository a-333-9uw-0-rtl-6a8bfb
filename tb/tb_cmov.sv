// tb_cmov: moves a region with the flag set and leaves it with the flag clear; checks constant time.
// Ends with a TB_RESULT line; a watchdog stops it if `done` never comes.
module tb_cmov;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] off1 = '0, off2 = '0;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  logic done;
  int checks = 0, failures = 0;
  logic flag = 0;
  always #5 clk = ~clk;
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  cmov dut (.clk, .rst_n, .start, .off1, .off2, .a_req, .a_rdata, .b_req, .b_rdata, .flag, .done);

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

    for (int f = 0; f < 2; f++) begin
      logic [63:0] s [64], d [64];
      for (int i = 0; i < 64; i++) begin s[i] = rnd64(); d[i] = rnd64(); u_mem.mem[20+i] = s[i]; u_mem.mem[400+i] = d[i]; end
      flag = f[0];
      run(20, 400, cyc);
      for (int i = 0; i < 64; i++) check(u_mem.mem[400+i] == (f ? s[i] : d[i]), $sformatf("flag %0d word %0d", f, i));
      check(cyc == 128, $sformatf("cycles %0d", cyc));
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
