// tb_copy_words: copies random words between regions and checks destination, neighbours and timing (LEN + 1 cycles).
// Ends with a TB_RESULT line; a watchdog stops it if `done` never comes.
module tb_copy_words;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] off1 = '0, off2 = '0;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  copy_words dut (.clk, .rst_n, .start, .off1, .off2, .a_req, .a_rdata, .b_req, .b_rdata, .done);

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

    for (int r = 0; r < 2; r++) begin
      logic [63:0] ref_w [64];
      int src = 10 + 300 * r, dst = 500 + 100 * r;
      for (int i = 0; i < 64; i++) begin ref_w[i] = rnd64(); u_mem.mem[src + i] = ref_w[i]; end
      u_mem.mem[dst + 64] = 64'hDEAD;
      run(src, dst, cyc);
      for (int i = 0; i < 64; i++) check(u_mem.mem[dst + i] == ref_w[i], $sformatf("word %0d", i));
      check(u_mem.mem[dst + 64] == 64'hDEAD, "word after region untouched");
      check(cyc == 65, $sformatf("cycles %0d", cyc));
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
