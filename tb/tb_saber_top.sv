// tb_saber_top: end-to-end test of the whole co-processor at its default
// sizes, driven only through the 207-bit scan interface like a host would.
// It runs the building blocks of a Saber key generation and more:
//   SHAKE-128 expands a seed into the packed public polynomials A (156
//   words, crossing several squeeze permutations; four words are compared
//   with FIPS 202 values computed offline), SHAKE-128 and the binomial
//   sampler make the secret vector s, the vector multiplier forms
//   sum A_l * s_l (checked against a schoolbook product computed here from
//   what is in memory) and, later, the same product with 10-bit packed
//   operands (the mod-p mode used for b^T s'), AddRound rounds it, Verify / CopyWords / CMOV are
//   exercised with the flag both clear and set, Unpack and AddPack are
//   checked against models written here, results are read back through
//   Mem Rd, and an instruction sent while busy must be dropped.  Each of
//   these mechanisms is counted and a mechanism that never happened counts
//   as a failure.
module tb_saber_top;
  import saber_pkg::*;
  localparam int LEN = 207;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_capture = 0, scan_update = 0;
  logic scan_out, busy;
  int checks = 0, failures = 0;
  int n_op [16];
  int n_drop = 0, n_flag_set = 0, n_flag_clr = 0, n_cmov_move = 0, n_cmov_keep = 0;
  int n_interp = 0, n_evalmul = 0, n_squeeze_perm = 0;

  always #5 clk = ~clk;
  saber_top dut (.*);

  // mechanism counters from inside the design
  always @(posedge clk) begin
    if (dut.u_ctrl.accept) n_op[dut.u_ctrl.instr.op]++;
    if (dut.u_vvm.u_fsm.go && dut.u_vvm.state == VV_EVAL_MUL && dut.u_vvm.n == 2'd2) n_interp++;
    if (dut.u_vvm.u_fsm.go && dut.u_vvm.state == VV_LOAD_B) n_evalmul++;
    if (dut.u_sha.st == dut.u_sha.S_SQZ && dut.u_sha.out_left > 1 &&
        dut.u_sha.lane == dut.u_sha.rate - 1) n_squeeze_perm++;
  end

  task automatic chk(input logic ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  // shift a frame in and issue its instruction
  task automatic send(input logic [3:0] op, input int o1, input int o2, input logic [63:0] d = '0);
    logic [LEN-1:0] f;
    f = '0;
    f[23:0]  = {AW'(o2), AW'(o1), op};
    f[87:24] = d;
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk); scan_en = 1; scan_in = f[i];
    end
    @(negedge clk); scan_en = 0; scan_update = 1;
    @(negedge clk); scan_update = 0;
    @(negedge clk);
  endtask

  task automatic wait_idle();
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic exec(input logic [3:0] op, input int o1, input int o2, input logic [63:0] d = '0);
    send(op, o1, o2, d);
    wait_idle();
  endtask

  // capture the status frame and shift it out
  task automatic status(output logic [LEN-1:0] f);
    @(negedge clk); scan_capture = 1;
    @(negedge clk); scan_capture = 0;
    for (int i = 0; i < LEN; i++) begin
      f[i] = scan_out; scan_en = 1; scan_in = 1'b0;
      @(negedge clk);
    end
    scan_en = 0;
  endtask

  function automatic logic [63:0] seed(int i);
    return 64'((i+1) * 64'h9E3779B97F4A7C15 + 64'h0123456789ABCDEF);
  endfunction

  function automatic logic [63:0] mem(int a);
    return dut.u_sram.mem[a];
  endfunction

  initial begin
    logic [LEN-1:0] st;
    int R [256];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- descriptors and seeds through Mem Wr ----
    exec(OP_MEM_WR, 0, 0, {16'd0, 16'd156, 16'd4, 16'd2});        // SHAKE-128, 4 in, 156 out
    for (int i = 0; i < 4; i++) exec(OP_MEM_WR, 1 + i, 0, seed(i));
    exec(OP_MEM_WR, 10, 0, {16'd0, 16'd96, 16'd4, 16'd2});
    for (int i = 0; i < 4; i++) exec(OP_MEM_WR, 11 + i, 0, seed(i) ^ 64'h5A5A);

    // ---- expand A and the secret noise ----
    exec(OP_SHA, 0, 100);
    chk(mem(100) == 64'hb2907d6d5b3dc86e && mem(120) == 64'h697cdb7b957d8a54 &&
        mem(121) == 64'hb72baa3b24c04845 && mem(255) == 64'h0ae12cffd0b51aa9, "SHAKE-128 output");
    exec(OP_SHA, 10, 300);
    for (int l = 0; l < 3; l++) exec(OP_SAMPLER, 300 + 32*l, 400 + 16*l);
    for (int i = 0; i < 768; i++) begin
      int e, s;
      logic [7:0] byte_v;
      byte_v = mem(300 + i/8)[8*(i%8) +: 8];
      e = $countones(byte_v[3:0]) - $countones(byte_v[7:4]);
      s = int'(mem(400 + i/16)[4*(i%16) +: 3]) * (mem(400 + i/16)[4*(i%16) + 3] ? -1 : 1);
      chk(s == e, $sformatf("secret coef %0d", i));
    end

    // ---- vector multiplication, with an instruction sent while busy ----
    send(OP_VVMUL, 100, 400);
    chk(busy, "busy during multiplication");
    send(OP_MEM_WR, 1000, 0, 64'hBAD);                               // must be dropped
    if (mem(1000) != 64'hBAD) n_drop++;
    status(st);
    chk(st[152] == 1'b1, "busy bit in status frame");
    wait_idle();
    for (int k = 0; k < 256; k++) R[k] = 0;
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < 256; i++) begin
        int a;
        a = int'(mem(100 + 52*l + (13*i)/64 + 0) >> ((13*i) % 64));
        if ((13*i) % 64 > 51) a = a | int'(mem(100 + 52*l + (13*i)/64 + 1) << (64 - (13*i) % 64));
        a = a & 8191;
        for (int j = 0; j < 256; j++) begin
          int s;
          s = int'(mem(400 + 16*l + j/16)[4*(j%16) +: 3]) * (mem(400 + 16*l + j/16)[4*(j%16) + 3] ? -1 : 1);
          if (i + j < 256) R[i+j] += a * s; else R[i+j-256] -= a * s;
        end
      end
    for (int k = 0; k < 256; k++)
      chk(mem(448 + k/4)[16*(k%4) +: 16] == 16'(R[k] & 8191), $sformatf("product coef %0d", k));

    // ---- AddRound ----
    exec(OP_ADDROUND, 448, 520);
    for (int k = 0; k < 256; k++)
      chk(mem(520 + k/4)[16*(k%4) +: 16] == 16'(((R[k] & 8191) + 4) % 8192 / 8), $sformatf("rounded %0d", k));

    // ---- Verify, CopyWords, CMOV ----
    exec(OP_VERIFY, 448, 520);
    status(st); if (st[153]) n_flag_set++;
    chk(st[153] == 1'b1, "verify: different regions");
    exec(OP_VERIFY, 5, 5);
    status(st); if (!st[153]) n_flag_clr++;
    exec(OP_COPY, 448, 600);
    exec(OP_VERIFY, 448, 600);
    status(st);
    chk(st[153] == 1'b0, "verify: copy is equal");
    exec(OP_CMOV, 520, 600);                                         // flag clear: keep
    if (mem(600) == mem(448) && mem(663) == mem(511)) n_cmov_keep++;
    exec(OP_VERIFY, 520, 600);                                       // sets the flag
    exec(OP_CMOV, 520, 600);                                         // flag set: move
    if (mem(600) == mem(520) && mem(663) == mem(583)) n_cmov_move++;

    // ---- Unpack (A region read as 10-bit packed) ----
    exec(OP_UNPACK, 100, 700);
    for (int k = 0; k < 256; k++) begin
      int b, v;
      b = 10*k;
      v = int'(mem(100 + b/64) >> (b % 64));
      if (b % 64 > 54) v = v | int'(mem(100 + b/64 + 1) << (64 - b % 64));
      chk(mem(700 + k/4)[16*(k%4) +: 16] == 16'(v & 1023), $sformatf("unpack %0d", k));
    end

    // ---- AddPack with a message written through Mem Wr ----
    for (int i = 0; i < 4; i++) exec(OP_MEM_WR, 800 + i, 0, seed(i + 7));
    exec(OP_ADDPACK, 520, 800);
    for (int k = 0; k < 256; k++) begin
      int v, m, e;
      v = int'(mem(520 + k/4)[16*(k%4) +: 10]);
      m = int'(mem(800 + k/64)[k%64]);
      e = ((v + 4 - 512*m) % 1024 + 1024) % 1024 / 64;
      chk(mem(804 + k/16)[4*(k%16) +: 4] == 4'(e), $sformatf("addpack %0d", k));
    end

    // ---- Mem Rd back through the scan chain ----
    for (int i = 0; i < 4; i++) begin
      exec(OP_MEM_RD, 448 + 21*i, 0);
      status(st);
      chk(st[151:88] == mem(448 + 21*i), "Mem Rd through scan chain");
    end
    exec(OP_SHAKE_EXT, 0, 0);

    // ---- mod-p product: 10-bit packed operands (the SHAKE output read as
    //      three 40-word polynomials), secrets at 400, result at 448 ----
    exec(OP_VVMUL_P, 100, 400);
    for (int k = 0; k < 256; k++) R[k] = 0;
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < 256; i++) begin
        int a;
        logic [127:0] two;
        two = {mem(100 + 40*l + (10*i)/64 + 1), mem(100 + 40*l + (10*i)/64)};
        a = int'(10'(two >> ((10*i) % 64)));
        for (int j = 0; j < 256; j++) begin
          int s;
          s = int'(mem(400 + 16*l + j/16)[4*(j%16) +: 3]) * (mem(400 + 16*l + j/16)[4*(j%16) + 3] ? -1 : 1);
          if (i + j < 256) R[i+j] += a * s; else R[i+j-256] -= a * s;
        end
      end
    for (int k = 0; k < 256; k++)
      chk(mem(448 + k/4)[16*(k%4) +: 16] == 16'(R[k] & 8191), $sformatf("mod-p product coef %0d", k));

    // ---- every mechanism must have happened ----
    begin
      logic [3:0] ops [13] = '{OP_MEM_WR, OP_MEM_RD, OP_SHA, OP_SAMPLER, OP_ADDPACK, OP_ADDROUND,
                               OP_UNPACK, OP_VVMUL, OP_VVMUL_P, OP_VERIFY, OP_COPY, OP_CMOV,
                               OP_SHAKE_EXT};
      foreach (ops[i]) chk(n_op[ops[i]] > 0, $sformatf("opcode %b never ran", ops[i]));
    end
    chk(n_drop == 1, "instruction dropped while busy");
    chk(n_flag_set > 0 && n_flag_clr > 0, "verify flag set and cleared");
    chk(n_cmov_keep == 1 && n_cmov_move == 1, "cmov keep and move");
    chk(n_evalmul == 6 && n_interp == 2, "lazy interpolation: 3 point-multiplication rounds, 1 interpolation per product");
    chk(n_squeeze_perm > 0, "squeeze needed extra permutations");
    $display("mechanisms: dropped %0d, flag set %0d clear %0d, cmov keep %0d move %0d, eval-mul %0d, interp %0d, squeeze perms %0d",
             n_drop, n_flag_set, n_flag_clr, n_cmov_keep, n_cmov_move, n_evalmul, n_interp, n_squeeze_perm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
