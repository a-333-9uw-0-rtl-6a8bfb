// tb_saber_encaps: a Saber encapsulation (l = 3, n = 256) run on the
// full-size chip through its serial interface, as a host would issue it.
// The public key (32-byte seed and the 10-bit packed vector b, 120 words)
// and the 32-byte random message are placed in memory first (host I/O is
// not part of the computation and is not timed).  The chip then runs:
//   SHA3-256 of the message, SHA3-256 of the public key, SHA3-512 of both
//   (giving the pre-key and the noise seed r), SHAKE-128 of the seed into
//   A, SHAKE-128 of r into noise and three sampler calls into s',
//   b'_i = round(sum_j A[i][j] s'_j) for each row i (vector product on the
//   13-bit A, then AddRound), v' = b^T s' with the 10-bit packed b read
//   directly (mod-p product), and AddPack, which adds the hashed message
//   and packs c_m.
// b' and c_m are checked coefficient by coefficient against models computed
// here from the operands found in memory.  The testbench counts the cycles
// in which the core is busy and checks them against the reported time of
// a whole encapsulation (116.9 us at 160 MHz = 18704 cycles).  Packing b'
// into bytes and the final key derivation hashes are left to the host and
// are not included.  Two Mem Wr instructions place SHAKE descriptors
// between steps; they are not timed either.
// Memory map (words): message descriptor 0, message 1..4; key descriptor 5,
// seed 6..9, b 10..129; A 130..597; s' 600..647 with products at
// 648..711; noise and then b' at 720..911; SHA3-512 descriptor 912, its
// input 913..920, output 921..928 (r at 925..928, its SHAKE descriptor
// written at 924 afterwards); c_m at 917..932.
// The operations and the reported time follow the paper; the instruction
// sequence, memory map and host steps are this design's own.
module tb_saber_encaps;
  import saber_pkg::*;
  localparam int LEN = 207;
  localparam int PK = 10, A0 = 130, S0 = 600, N0 = 720, B0 = 720, G0 = 912, MH = G0 + 1;
  localparam int PAPER_CYCLES = 18704;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_capture = 0, scan_update = 0;
  logic scan_out, busy, timed = 0;
  int checks = 0, failures = 0, core_cycles = 0;

  always #5 clk = ~clk;
  saber_top dut (.*);

  always @(posedge clk) if (rst_n && busy && timed) core_cycles++;

  task automatic chk(input logic ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  task automatic send(input logic [3:0] op, input int o1, input int o2, input logic [63:0] d = '0);
    logic [LEN-1:0] f;
    f = '0;
    f[23:0]  = {AW'(o2), AW'(o1), op};
    f[87:24] = d;
    timed = (op != OP_MEM_WR);
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk); scan_en = 1; scan_in = f[i];
    end
    @(negedge clk); scan_en = 0; scan_update = 1;
    @(negedge clk); scan_update = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
    timed = 0;
  endtask

  function automatic logic [63:0] rnd(int i);
    return 64'(64'(i+11) * 64'h9FB21C651E98DF25 ^ 64'hC2B2AE3D27D4EB4F);
  endfunction

  function automatic logic [63:0] desc(int mode, int nin, int nout);
    return {16'd0, 16'(nout), 16'(nin), 14'd0, 2'(mode)};
  endfunction

  function automatic logic [63:0] mem(int a);
    return dut.u_sram.mem[a];
  endfunction

  function automatic int coef_w(int base, int w, int k);
    logic [127:0] two;
    two = {mem(base + (w*k)/64 + 1), mem(base + (w*k)/64)};
    return int'(two >> ((w*k) % 64)) & ((1 << w) - 1);
  endfunction

  function automatic int coef_s(int base, int k);
    logic [3:0] v;
    v = mem(base + k/16)[4*(k%16) +: 4];
    return v[3] ? -int'(v[2:0]) : int'(v[2:0]);
  endfunction

  // sum_j P_j * s'_j mod (x^256 + 1), P_j packed W-bit at base + stride*j
  task automatic model(input int base, input int stride, input int w, output int R [256]);
    for (int k = 0; k < 256; k++) R[k] = 0;
    for (int j = 0; j < 3; j++)
      for (int x = 0; x < 256; x++) begin
        int a;
        a = coef_w(base + stride*j, w, x);
        for (int y = 0; y < 256; y++) begin
          int s;
          s = coef_s(S0 + 16*j, y);
          if (x + y < 256) R[x+y] += a * s; else R[x+y-256] -= a * s;
        end
      end
  endtask

  initial begin
    int R [256];
    logic [63:0] kh3;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // public key and message, as delivered by the host
    dut.u_sram.mem[0]  = desc(0, 4, 4);                 // SHA3-256(m)
    for (int i = 0; i < 4; i++) dut.u_sram.mem[1 + i] = rnd(i);
    dut.u_sram.mem[5]  = desc(0, 124, 4);               // SHA3-256(pk)
    for (int i = 0; i < 124; i++) dut.u_sram.mem[6 + i] = rnd(100 + i);
    dut.u_sram.mem[G0] = desc(1, 8, 8);                 // SHA3-512(m' || H(pk))

    // hashes
    send(OP_SHA, 0, MH);
    send(OP_SHA, 5, MH + 4);
    send(OP_SHA, G0, G0 + 9);
    kh3 = mem(G0 + 12);                                 // host keeps the last pre-key word
    send(OP_MEM_WR, G0 + 12, 0, desc(2, 4, 96));        // SHAKE-128(r)
    send(OP_MEM_WR, 5, 0, desc(2, 4, 468));             // SHAKE-128(seed)

    // matrix, secret
    send(OP_SHA, 5, A0);
    send(OP_SHA, G0 + 12, N0);
    for (int l = 0; l < 3; l++) send(OP_SAMPLER, N0 + 32*l, S0 + 16*l);

    // b' = round(A s'), rows of A are contiguous
    for (int i = 0; i < 3; i++) begin
      send(OP_VVMUL, A0 + 156*i, S0);
      send(OP_ADDROUND, S0 + 48, B0 + 64*i);
    end
    // v' = b^T s' from the packed public key, then c_m
    send(OP_VVMUL_P, PK, S0);
    send(OP_ADDPACK, S0 + 48, MH);

    // check b'
    for (int i = 0; i < 3; i++) begin
      model(A0 + 156*i, 52, 13, R);
      for (int k = 0; k < 256; k++)
        chk(mem(B0 + 64*i + k/4)[16*(k%4) +: 16] == 16'((((R[k] & 8191) + 4) & 8191) >> 3),
            $sformatf("b'[%0d] coef %0d", i, k));
    end
    // check c_m
    model(PK, 40, 10, R);
    for (int k = 0; k < 256; k++) begin
      int m, c;
      m = int'(mem(MH + k/64)[k%64]);
      c = (((R[k] & 1023) + 4 - 512*m) & 1023) >> 6;
      chk(int'(mem(MH + 4 + k/16)[4*(k%16) +: 4]) == c, $sformatf("c_m coef %0d", k));
    end
    chk(kh3 != '0, "pre-key word read back");

    $display("encapsulation: %0d core cycles; reported for the whole operation: %0d",
             core_cycles, PAPER_CYCLES);
    chk(core_cycles <= PAPER_CYCLES, "cycle count within the reported encapsulation time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
