// tb_binomial_sampler: samples 256 coefficients from random bytes and checks value and sign-magnitude code.
// Ends with a TB_RESULT line; a watchdog stops it if `done` never comes.
module tb_binomial_sampler;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] off1 = '0, off2 = '0;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  binomial_sampler dut (.clk, .rst_n, .start, .off1, .off2, .a_req, .a_rdata, .b_req, .b_rdata, .done);

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
      logic [2047:0] r;
      for (int w = 0; w < 32; w++) begin r[64*w +: 64] = rnd64(); u_mem.mem[70 + w] = r[64*w +: 64]; end
      run(70, 900, cyc);
      for (int i = 0; i < 256; i++) begin
        int e;
        logic [3:0] code;
        e = $countones(r[8*i +: 4]) - $countones(r[8*i+4 +: 4]);
        code = (e < 0) ? {1'b1, 3'(-e)} : {1'b0, 3'(e)};
        check(u_mem.mem[900 + i/16][4*(i%16) +: 4] == code, $sformatf("coef %0d", i));
      end
      check(cyc == 48, $sformatf("cycles %0d", cyc));
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
