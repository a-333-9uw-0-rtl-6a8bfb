// tb_mem_bus: puts a distinct request on every unit's two slots and checks
// that exactly the selected owner's requests reach the SRAM ports.
module tb_mem_bus;
  import saber_pkg::*;
  unit_e sel;
  mem_req_t [NUNIT-1:0] req_a, req_b;
  mem_req_t a_req, b_req;
  int checks = 0, failures = 0;
  mem_bus dut (.*);
  initial begin
    for (int t = 0; t < 3; t++) begin
      for (int u = 0; u < NUNIT; u++) begin
        req_a[u] = '{1'b1, 1'(u), AW'($urandom()), {$urandom(), $urandom()}};
        req_b[u] = '{1'(u), 1'b1, AW'($urandom()), {$urandom(), $urandom()}};
      end
      for (int u = 0; u < NUNIT; u++) begin
        sel = unit_e'(u);
        #1;
        checks++;
        if (a_req != req_a[u] || b_req != req_b[u]) begin failures++; $display("FAIL owner %0d", u); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
