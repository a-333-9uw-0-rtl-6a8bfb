// tb_serial_to_parallel: shifts a random 207-bit frame in, checks the
// parallel view, then captures another frame and checks that it leaves on
// scan_out bit 0 first while a third frame enters.
module tb_serial_to_parallel;
  localparam int LEN = 207;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, capture = 0, scan_out;
  logic [LEN-1:0] cap_data = '0, frame, f1, f2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  serial_to_parallel #(.LEN(LEN)) dut (.*);

  function automatic logic [LEN-1:0] rframe();
    logic [LEN-1:0] f;
    for (int i = 0; i < LEN; i++) f[i] = 1'($urandom());
    return f;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    f1 = rframe();
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk); scan_en = 1; scan_in = f1[i];
    end
    @(negedge clk); scan_en = 0;
    checks++;
    if (frame != f1) begin failures++; $display("FAIL shift in"); end
    f2 = rframe();
    cap_data = f2; capture = 1;
    @(negedge clk); capture = 0;
    for (int i = 0; i < LEN; i++) begin
      checks++;
      if (scan_out != f2[i]) begin failures++; if (failures < 5) $display("FAIL out bit %0d", i); end
      scan_en = 1; scan_in = f1[i];
      @(negedge clk);
    end
    scan_en = 0;
    checks++;
    if (frame != f1) begin failures++; $display("FAIL second frame"); end
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
