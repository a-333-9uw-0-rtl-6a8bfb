// tb_saber_keygen: the arithmetic of a complete Saber key generation
// (l = 3, n = 256, q = 2^13, p = 2^10) run on the full-size chip through
// its serial interface, as a host would issue it:
//   1. SHAKE-128 expands a 32-byte seed into the 3x3 matrix A, 9 packed
//      13-bit polynomials of 52 words each, in row order (468 words).
//   2. SHAKE-128 expands a second seed into 96 words of noise, and the
//      binomial sampler turns them into the secret vector s.
//   3. For each i, b_i = sum_j A[j][i] * s_j needs column i of A, so three
//      Copy instructions gather A[0][i], A[1][i], A[2][i] into a work area
//      (in increasing address order, so each 64-word copy's 12-word
//      overrun is overwritten by the next one), then the vector multiplier
//      forms the product and AddRound rounds it to 10 bits.
// The rounded vector b is checked coefficient by coefficient against a
// schoolbook model computed here from the A and s found in memory.
// The testbench also counts the cycles in which the core is busy and
// checks that this subset of key generation needs no more cycles than the
// whole key generation is reported to take on silicon (89.6 us at
// 160 MHz = 14336 cycles).  Packing b to bytes and hashing the public key
// are host work here and are not included.
// Memory map (words): A 20..487, s 490..537 with the product at 538..601,
// work area 610..777, noise and then b at 800..991.
// The operations and the reported time follow the paper; the instruction
// sequence, memory map and host steps are this design's own.
module tb_saber_keygen;
  import saber_pkg::*;
  localparam int LEN = 207;
  localparam int A0 = 20, S0 = 490, W0 = 610, N0 = 800, B0 = 800;
  localparam int PAPER_CYCLES = 14336;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_capture = 0, scan_update = 0;
  logic scan_out, busy;
  int checks = 0, failures = 0, core_cycles = 0;

  always #5 clk = ~clk;
  saber_top dut (.*);

  always @(posedge clk) if (rst_n && busy) core_cycles++;

  task automatic chk(input logic ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

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
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic logic [63:0] seed(int i);
    return 64'(64'(i+3) * 64'hD1B54A32D192ED03 + 64'h5851F42D4C957F2D);
  endfunction

  function automatic logic [63:0] mem(int a);
    return dut.u_sram.mem[a];
  endfunction

  // coefficient k of the packed 13-bit polynomial at word address base
  function automatic int coef_q(int base, int k);
    logic [127:0] two;
    two = {mem(base + (13*k)/64 + 1), mem(base + (13*k)/64)};
    return int'(13'(two >> ((13*k) % 64)));
  endfunction

  function automatic int coef_s(int base, int k);
    logic [3:0] v;
    v = mem(base + k/16)[4*(k%16) +: 4];
    return v[3] ? -int'(v[2:0]) : int'(v[2:0]);
  endfunction

  initial begin
    int R [256];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // descriptors and seeds
    send(OP_MEM_WR, 0, 0, {16'd0, 16'd468, 16'd4, 16'd2});      // SHAKE-128, 4 words in, 468 out
    for (int i = 0; i < 4; i++) send(OP_MEM_WR, 1 + i, 0, seed(i));
    send(OP_MEM_WR, 10, 0, {16'd0, 16'd96, 16'd4, 16'd2});      // SHAKE-128, 4 words in, 96 out
    for (int i = 0; i < 4; i++) send(OP_MEM_WR, 11 + i, 0, seed(i + 4));

    // matrix and secret
    send(OP_SHA, 0, A0);
    send(OP_SHA, 10, N0);
    for (int l = 0; l < 3; l++) send(OP_SAMPLER, N0 + 32*l, S0 + 16*l);

    // b = round(A^T s)
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) send(OP_COPY, A0 + 52*(3*j + i), W0 + 52*j);
      send(OP_VVMUL, W0, S0);
      send(OP_ADDROUND, S0 + 48, B0 + 64*i);
    end

    // check against the schoolbook model
    for (int i = 0; i < 3; i++) begin
      for (int k = 0; k < 256; k++) R[k] = 0;
      for (int j = 0; j < 3; j++)
        for (int x = 0; x < 256; x++) begin
          int a;
          a = coef_q(A0 + 52*(3*j + i), x);
          for (int y = 0; y < 256; y++) begin
            int s;
            s = coef_s(S0 + 16*j, y);
            if (x + y < 256) R[x+y] += a * s; else R[x+y-256] -= a * s;
          end
        end
      for (int k = 0; k < 256; k++) begin
        int e;
        e = (((R[k] & 8191) + 4) & 8191) >> 3;
        chk(mem(B0 + 64*i + k/4)[16*(k%4) +: 16] == 16'(e), $sformatf("b[%0d] coef %0d", i, k));
      end
    end

    $display("key generation: %0d core cycles; reported for the whole operation: %0d",
             core_cycles, PAPER_CYCLES);
    chk(core_cycles <= PAPER_CYCLES, "cycle count within the reported key generation time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
