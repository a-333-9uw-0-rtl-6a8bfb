// tb_point_mul: one point multiplier against behavioural cache arrays.
// Multiplies a random 16-bit A by a random signed 8-bit B modulo y^64 + 1
// (writing), then a second pair with accumulate = 1, and compares C with a
// schoolbook negacyclic product mod 2^16.  Checks the 1168-cycle latency.
module tb_point_mul;
  logic clk = 0, rst_n = 0, start = 0, accumulate = 0;
  logic a_re, b_re, c_re, c_we, busy, done;
  logic [5:0] a_addr, c_raddr, c_waddr;
  logic [4:0] b_addr;
  logic [15:0] a_data, b_data, c_rdata, c_wdata;
  logic [15:0] A [64], C [64];
  logic [7:0]  B [64];
  int ref_c [64];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  point_mul #(.NMAC(4)) dut (.*);

  always @(posedge clk) begin
    if (a_re) a_data <= A[a_addr];
    if (b_re) b_data <= {B[2*b_addr+1], B[2*b_addr]};
    if (c_re) c_rdata <= C[c_raddr];
    if (c_we) C[c_waddr] <= c_wdata;
  end

  task automatic run_one(input logic acc);
    int cyc = 0;
    for (int i = 0; i < 64; i++) begin A[i] = 16'($urandom()); B[i] = 8'(int'($urandom_range(120)) - 60); end
    if (!acc) for (int i = 0; i < 64; i++) ref_c[i] = 0;
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        int p;
        p = int'(A[i]) * int'($signed(B[j]));
        if (i + j < 64) ref_c[i+j] += p; else ref_c[i+j-64] -= p;
      end
    accumulate = acc;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (cyc != 1168) begin failures++; $display("FAIL latency %0d", cyc); end
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (C[i] != 16'(ref_c[i])) begin failures++; if (failures < 8) $display("FAIL c%0d %h %h", i, C[i], 16'(ref_c[i])); end
    end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) C[i] = 16'($urandom());   // stale contents
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_one(0);
    run_one(1);
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
