// tb_serial_if: shifts frames in, pulses update and checks the decoded
// instruction and write word and the single instr_valid pulse; then
// captures status and checks the read word, busy and flag bits as they
// are shifted out.
module tb_serial_if;
  import saber_pkg::*;
  localparam int LEN = 207;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, capture = 0, update = 0, scan_out;
  instr_t instr;
  logic [DW-1:0] wdata, rdata = '0;
  logic instr_valid, busy = 0, flag = 0;
  logic [LEN-1:0] f, got;
  int checks = 0, failures = 0, pulses = 0;
  always #5 clk = ~clk;
  serial_if dut (.*);
  always @(posedge clk) if (rst_n && instr_valid) pulses++;

  task automatic chk(input logic ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < LEN; i++) f[i] = 1'($urandom());
      for (int i = 0; i < LEN; i++) begin @(negedge clk); scan_en = 1; scan_in = f[i]; end
      @(negedge clk); scan_en = 0; update = 1;
      @(negedge clk); update = 0;
      chk(instr == instr_t'(f[23:0]), "instruction");
      chk(wdata == f[87:24], "write data");
      rdata = {$urandom(), $urandom()}; busy = 1'(t); flag = 1'(t >> 1);
      capture = 1; @(negedge clk); capture = 0;
      for (int i = 0; i < LEN; i++) begin got[i] = scan_out; scan_en = 1; scan_in = 0; @(negedge clk); end
      scan_en = 0;
      chk(got[151:88] == rdata, "read data");
      chk(got[152] == busy && got[153] == flag, "status bits");
      chk(got[23:0] == f[23:0], "instruction echoed");
    end
    chk(pulses == 4, $sformatf("instr_valid pulses %0d", pulses));
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
