// tb_verify: compares equal and unequal regions and checks the sticky flag and its clear.
// Ends with a TB_RESULT line; a watchdog stops it if `done` never comes.
module tb_verify;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] off1 = '0, off2 = '0;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  logic done;
  int checks = 0, failures = 0;
  logic flag;
  always #5 clk = ~clk;
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  verify dut (.clk, .rst_n, .start, .off1, .off2, .a_req, .a_rdata, .b_req, .b_rdata, .flag, .done);

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

    for (int i = 0; i < 64; i++) begin logic [63:0] w; w = rnd64(); u_mem.mem[100 + i] = w; u_mem.mem[300 + i] = w; end
    run(5, 5, cyc);  check(flag == 0, "clear");
    run(100, 300, cyc); check(flag == 0, "equal regions");
    check(cyc == 65, $sformatf("cycles %0d", cyc));
    u_mem.mem[300 + 63] ^= 64'h1;
    run(100, 300, cyc); check(flag == 1, "last word differs");
    u_mem.mem[300 + 63] ^= 64'h1;
    run(100, 300, cyc); check(flag == 1, "flag sticky");
    run(7, 7, cyc);  check(flag == 0, "clear again");
    u_mem.mem[300 + 0] ^= 64'h8000000000000000;
    run(100, 300, cyc); check(flag == 1, "first word differs");
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
