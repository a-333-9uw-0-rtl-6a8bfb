// tb_vvectormul: end-to-end test of the vector-vector multiplier.
// Fills a data SRAM with L random public polynomials (13-bit, bit-packed)
// and L random secrets in [-4,4] (4-bit sign-magnitude), runs the
// multiplier twice with different data, then once more with 10-bit packed
// public polynomials (40 words each, the mod-p mode), and compares all 256 result
// coefficients with a schoolbook negacyclic product computed here.  Also
// checks the cycle counts: 1168 cycles per point multiplication and 70 for
// the interpolation.
module tb_vvectormul;
  import saber_pkg::*;
  localparam int L = 3;

  logic clk = 0, rst_n = 0, start = 0, pmode = 0;
  logic [AW-1:0] off1, off2;
  mem_req_t a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  vv_state_e state;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req, .b_rdata);
  vvectormul #(.L(L)) dut (.clk, .rst_n, .start, .pmode, .off1, .off2, .a_req, .a_rdata,
                           .b_req, .b_rdata, .state, .done);

  int A [L][256];
  int S [L][256];
  int R [256];
  int n_mul = 0, n_int = 0, cyc_state = 0;
  vv_state_e prev_state = VV_IDLE;

  // measure how long each state lasts
  always @(posedge clk) begin
    if (state != prev_state) begin
      if (prev_state == VV_EVAL_MUL) begin
        checks++; n_mul++;
        if (cyc_state != 1168) begin failures++; $display("FAIL EvalMul took %0d cycles", cyc_state); end
      end
      if (prev_state == VV_INTERP) begin
        checks++; n_int++;
        if (cyc_state != 70) begin failures++; $display("FAIL Interp took %0d cycles", cyc_state); end
      end
      if (prev_state == VV_LOAD_A || prev_state == VV_LOAD_B) $display("state %s took %0d cycles", prev_state.name(), cyc_state);
      cyc_state = 1;
    end else cyc_state++;
    prev_state = state;
  end

  task automatic load(input int base1, input int base2);
    logic [13*256-1:0] pa;
    logic [4*256-1:0]  ps;
    int aw = pmode ? 40 : 52;
    for (int l = 0; l < L; l++) begin
      pa = '0;
      for (int i = 0; i < 256; i++) begin
        int s;
        A[l][i] = pmode ? $urandom_range(1023) : $urandom_range(8191);
        s = int'($urandom_range(8)) - 4;
        S[l][i] = s;
        if (pmode) pa[10*i +: 10] = 10'(A[l][i]);
        else       pa[13*i +: 13] = 13'(A[l][i]);
        ps[4*i +: 4]   = (s < 0) ? {1'b1, 3'(-s)} : {1'b0, 3'(s)};
      end
      for (int w = 0; w < aw; w++) u_mem.mem[base1 + aw*l + w] = pa[64*w +: 64];
      for (int w = 0; w < 16; w++) u_mem.mem[base2 + 16*l + w] = ps[64*w +: 64];
    end
    for (int k = 0; k < 256; k++) R[k] = 0;
    for (int l = 0; l < L; l++)
      for (int i = 0; i < 256; i++)
        for (int j = 0; j < 256; j++)
          if (i + j < 256) R[i+j] += A[l][i] * S[l][j];
          else             R[i+j-256] -= A[l][i] * S[l][j];
  endtask

  task automatic run(input int base1, input int base2);
    int cyc = 0;
    load(base1, base2);
    off1 = AW'(base1); off2 = AW'(base2);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    $display("vector multiplication took %0d cycles", cyc);
    // per pair: 66 + 66 load cycles and 1168 multiplication cycles; 70 for interpolation
    checks++;
    if (cyc != L * (66 + 66 + 1168) + 70 - 1) begin failures++; $display("FAIL total cycles"); end
    for (int k = 0; k < 256; k++) begin
      logic [15:0] got;
      got = u_mem.mem[base2 + 16*L + k/4][16*(k%4) +: 16];
      checks++;
      if (got != 16'(R[k] & 8191)) begin
        failures++;
        if (failures < 10) $display("FAIL coef %0d got %h exp %h", k, got, R[k] & 8191);
      end
    end
  endtask

  initial begin
    off1 = '0; off2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 220);
    run(300, 700);
    pmode = 1;                       // 10-bit packed operands, as for b^T s'
    run(100, 500);
    repeat (3) @(negedge clk);
    checks++;
    if (n_mul != 3*L || n_int != 3) begin failures++; $display("FAIL state counts %0d %0d", n_mul, n_int); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
