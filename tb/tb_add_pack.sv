// tb_add_pack: packs 256 random 10-bit coefficients with a random message and checks all 4-bit results.
// Ends with a TB_RESULT line; a watchdog stops it if `done` never comes.
module tb_add_pack;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] off1 = '0, off2 = '0;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  add_pack dut (.clk, .rst_n, .start, .off1, .off2, .a_req, .a_rdata, .b_req, .b_rdata, .done);

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
      int v [256];
      logic [255:0] m;
      for (int i = 0; i < 256; i++) begin v[i] = $urandom_range(1023); u_mem.mem[40 + i/4][16*(i%4) +: 16] = 16'(v[i]); end
      for (int w = 0; w < 4; w++) begin m[64*w +: 64] = rnd64(); u_mem.mem[300 + w] = m[64*w +: 64]; end
      run(40, 300, cyc);
      for (int i = 0; i < 256; i++) begin
        int e;
        e = (((v[i] + 4 - 512 * int'(m[i])) % 1024 + 1024) % 1024) / 64;
        check(u_mem.mem[304 + i/16][4*(i%16) +: 4] == 4'(e), $sformatf("coef %0d", i));
      end
      check(cyc == 96, $sformatf("cycles %0d", cyc));
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
