// tb_sha3_shake: hashes fixed messages with SHA3-256, SHA3-512 and SHAKE-128 and compares with FIPS 202 digests computed offline (message word i = (i+1)*0x9E3779B97F4A7C15 + 0x0123456789ABCDEF mod 2^64).
// Ends with a TB_RESULT line; a watchdog stops it if `done` never comes.
module tb_sha3_shake;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] off1 = '0, off2 = '0;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  logic done;
  int checks = 0, failures = 0;
  logic [63:0] exp [5][30];
  always #5 clk = ~clk;
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  sha3_shake dut (.clk, .rst_n, .start, .off1, .off2, .a_req, .a_rdata, .b_req, .b_rdata, .done);

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

    exp[0][0] = 64'h66d71ebff8c6ffa7;
    exp[0][1] = 64'h62d661a05647c151;
    exp[0][2] = 64'hfa493be44dff80f5;
    exp[0][3] = 64'h4a43f8804b0ad882;
    exp[1][0] = 64'h994d06df9e0fa1a4;
    exp[1][1] = 64'h0744fd52a5deac25;
    exp[1][2] = 64'h571daf6d8390bffe;
    exp[1][3] = 64'h9bbaa487cf317c54;
    exp[1][4] = 64'h0d7ea69f8d5539dd;
    exp[1][5] = 64'hfc678d0cb31d2148;
    exp[1][6] = 64'he52e6fae38e14024;
    exp[1][7] = 64'h9d1bd63e196c7a86;
    exp[2][0] = 64'h7d0547423f0c8840;
    exp[2][1] = 64'h77a5763b6a9e8ccc;
    exp[2][2] = 64'h8e2adceb88f6e09f;
    exp[2][3] = 64'heef8d68574044153;
    exp[2][4] = 64'hcf033df6e18c477c;
    exp[2][5] = 64'h23d25953084392e7;
    exp[2][6] = 64'h15b253618a79e5ca;
    exp[2][7] = 64'h8c5be5137ad0cf5c;
    exp[3][0] = 64'hb2907d6d5b3dc86e;
    exp[3][1] = 64'h6a2a6bd116cfb6b6;
    exp[3][2] = 64'h6e530d9585ce3be6;
    exp[3][3] = 64'h63a8cae1d071afa5;
    exp[3][4] = 64'hac0d963fb07d6ba4;
    exp[3][5] = 64'heaf263ea51ec5791;
    exp[3][6] = 64'hef9950e075edafaa;
    exp[3][7] = 64'ha632298d5e98eb35;
    exp[3][8] = 64'h3f64ee7484d97ae0;
    exp[3][9] = 64'haa6d0122e7e8fbf6;
    exp[3][10] = 64'hdbf2779862b5df59;
    exp[3][11] = 64'hc5d5b6acbabaa33f;
    exp[3][12] = 64'hcace7555040132d8;
    exp[3][13] = 64'h0451f08c8b3ea46e;
    exp[3][14] = 64'hbfed5f7a424bd829;
    exp[3][15] = 64'h998c1cbb0dfce31f;
    exp[3][16] = 64'h4142fa6e21ddf7f8;
    exp[3][17] = 64'h3bfa649142e8558d;
    exp[3][18] = 64'h1bc415f04986ed66;
    exp[3][19] = 64'h5effb3b7dae41e4e;
    exp[3][20] = 64'h697cdb7b957d8a54;
    exp[3][21] = 64'hb72baa3b24c04845;
    exp[3][22] = 64'hb8c91e59cb00972f;
    exp[3][23] = 64'hb526b7d6a1058e61;
    exp[3][24] = 64'h265f5855a4a15c10;
    exp[3][25] = 64'hedca6c4da2362d62;
    exp[3][26] = 64'h940abdaa8e050118;
    exp[3][27] = 64'h1b589eccb76c8537;
    exp[3][28] = 64'h1cc2b2e0801be072;
    exp[3][29] = 64'h82bd4dcd997845e7;
    exp[4][0] = 64'h67d2b7a4b48f9025;
    exp[4][1] = 64'h41d93100768f6a22;
    exp[4][2] = 64'ha3187a2000d4d41b;
    exp[4][3] = 64'h94565217241dac84;
    begin
      int mode [5] = '{0, 1, 1, 2, 0};
      int nin  [5] = '{0, 4, 17, 4, 40};
      int nout [5] = '{4, 4, 8, 30, 4};
      for (int k = 0; k < 5; k++) begin
        u_mem.mem[100] = {16'd0, 16'(nout[k]), 16'(nin[k]), 14'd0, 2'(mode[k])};
        for (int i = 0; i < nin[k]; i++) u_mem.mem[101 + i] = 64'((i+1) * 64'h9E3779B97F4A7C15 + 64'h0123456789ABCDEF);
        run(100, 500, cyc);
        for (int i = 0; i < nout[k]; i++) check(u_mem.mem[500 + i] == exp[k][i], $sformatf("case %0d word %0d: %h", k, i, u_mem.mem[500+i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
