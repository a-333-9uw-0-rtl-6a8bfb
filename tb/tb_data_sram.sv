// tb_data_sram: writes random words through both ports, reads them back
// through both ports against a shadow copy, checks the one-cycle read
// latency and that port B wins a same-address write.
module tb_data_sram;
  import saber_pkg::*;
  logic clk = 0;
  mem_req_t a_req = MEM_IDLE, b_req = MEM_IDLE;
  logic [DW-1:0] a_rdata, b_rdata;
  logic [63:0] shadow [1024];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  data_sram dut (.clk, .a_req, .a_rdata, .b_req, .b_rdata);

  task automatic chk(input logic ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      shadow[i] = {$urandom(), $urandom()};
      if (i % 2) begin a_req = '{1'b1, 1'b1, AW'(i), shadow[i]}; b_req = MEM_IDLE; end
      else       begin b_req = '{1'b1, 1'b1, AW'(i), shadow[i]}; a_req = MEM_IDLE; end
    end
    for (int t = 0; t < 300; t++) begin
      int x, y;
      x = $urandom_range(1023); y = $urandom_range(1023);
      @(negedge clk);
      a_req = '{1'b1, 1'b0, AW'(x), '0};
      b_req = '{1'b1, 1'b0, AW'(y), '0};
      @(negedge clk);
      a_req = MEM_IDLE; b_req = MEM_IDLE;
      chk(a_rdata == shadow[x], "port A read");
      chk(b_rdata == shadow[y], "port B read");
    end
    @(negedge clk);
    a_req = '{1'b1, 1'b1, 10'd5, 64'hAAAA};
    b_req = '{1'b1, 1'b1, 10'd5, 64'hBBBB};
    @(negedge clk);
    a_req = '{1'b1, 1'b0, 10'd5, '0}; b_req = MEM_IDLE;
    @(negedge clk);
    a_req = MEM_IDLE;
    chk(a_rdata == 64'hBBBB, "port B wins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
