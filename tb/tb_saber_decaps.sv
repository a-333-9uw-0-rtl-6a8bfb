// tb_saber_decaps: a complete Saber key exchange (l = 3, n = 256) on the
// full-size chip, driven through its serial interface as a host would
// drive it, with the decapsulation timed.
//   1. Key generation: SHAKE-128 expands the seed into A, the sampler gives
//      s, and b = round(A^T s) is formed column by column (as in
//      tb_saber_keygen).  The host packs b to 10 bits for the public key.
//   2. Encapsulation of a random message (as in tb_saber_encaps), giving
//      the ciphertext b' (packed to 10 bits by the host) and c_m.
//   3. Decapsulation, twice: with the true ciphertext and with one bit of
//      c_m flipped.  Its steps on the chip:
//        v = b'^T s straight from the packed ciphertext (mod-p product);
//        the host reads v back and recovers m' = ((v + h2 - 2^6 c_m) mod
//        2^10) >> 9 with h2 = 228 (no unit of the chip does this step);
//        SHA3-512(m' || H(pk)) gives the pre-key K' and the noise seed r;
//        re-encryption: noise, s' (written over s), v' = b^T s', AddPack,
//        then for each row A s', AddRound, Unpack of the received row and
//        Verify against it; the third Verify also spans m' and c_m;
//        CMOV then replaces K' by the secret z if anything differed.
//      The memory plan keeps all of this in the 1024-word SRAM: the
//      received rows are unpacked one at a time into a scratch area, and
//      rows 0 and 1 share one buffer because each is verified at once.
// Checks: the decrypted message equals the encapsulated one, Verify's flag
// is 0 for the true ciphertext and 1 for the altered one, and CMOV keeps K'
// or puts z in its place accordingly.  The busy cycles of the first
// decapsulation (Mem Wr excluded, as host I/O) are checked against the
// reported time of a whole decapsulation (146.2 us at 160 MHz = 23392
// cycles).  Host reads of v are done through the memory array here and are
// not timed; the final key hashes are left to the host.
// The operations and the reported time follow the paper; the instruction
// sequence, memory plan and host steps are this design's own.
module tb_saber_decaps;
  import saber_pkg::*;
  localparam int LEN = 207;
  localparam int PAPER_CYCLES = 23392;
  // decapsulation memory plan (words)
  localparam int HS = 0;           // SHA3-512 descriptor; m' 1..4, H(pk) 5..8, out 9..16
  localparam int SD = 17;          // SHAKE(seed) descriptor, seed 18..21
  localparam int PB = 22;          // packed b 22..141; later row 2, m', c_m at 22..105
  localparam int S0 = 142;         // s, then s'; products at 190..253
  localparam int CT = 254;         // packed b' 254..373
  localparam int SC = 374;         // scratch row 374..437, m' 438..441, received c_m 442..457
  localparam int A0 = 458;         // noise, then A 458..925
  localparam int R01 = 926;        // rows 0 and 1, 926..989
  localparam int ZZ = 990;         // z 990..993
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_capture = 0, scan_update = 0;
  logic scan_out, busy, timed = 0, timing = 0;
  int checks = 0, failures = 0, core_cycles = 0;

  logic [63:0] seedw [4], pkb [120], hpk [4], mh [4], ctb [120], ctc [16], sk [48], z [4];

  always #5 clk = ~clk;
  saber_top dut (.*);

  always @(posedge clk) if (rst_n && busy && timed && timing) core_cycles++;

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
    return 64'(64'(i+7) * 64'hD1B54A32D192ED03 + 64'h5851F42D4C957F2D);
  endfunction

  function automatic logic [63:0] desc(int mode, int nin, int nout);
    return {16'd0, 16'(nout), 16'(nin), 14'd0, 2'(mode)};
  endfunction

  function automatic logic [63:0] mem(int a);
    return dut.u_sram.mem[a];
  endfunction

  task automatic clear_mem;
    for (int a = 0; a < 1024; a++) dut.u_sram.mem[a] = '0;
  endtask

  // host packing of one polynomial of 16-bit lanes (64 words at src) into
  // 10-bit fields, 40 words
  task automatic pack10(input int src, output logic [63:0] o [40]);
    for (int w = 0; w < 40; w++) o[w] = '0;
    for (int k = 0; k < 256; k++)
      for (int b = 0; b < 10; b++)
        o[(10*k + b)/64][(10*k + b)%64] = mem(src + k/4)[16*(k%4) + b];
  endtask

  task automatic keygen;
    logic [63:0] p [40];
    clear_mem();
    for (int i = 0; i < 4; i++) seedw[i] = rnd(i);
    dut.u_sram.mem[0] = desc(2, 4, 468);
    for (int i = 0; i < 4; i++) dut.u_sram.mem[1 + i] = seedw[i];
    dut.u_sram.mem[10] = desc(2, 4, 96);
    for (int i = 0; i < 4; i++) dut.u_sram.mem[11 + i] = rnd(10 + i);
    send(OP_SHA, 0, 20);                                 // A at 20..487
    send(OP_SHA, 10, 800);                               // noise at 800
    for (int l = 0; l < 3; l++) send(OP_SAMPLER, 800 + 32*l, 490 + 16*l);
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) send(OP_COPY, 20 + 52*(3*j + i), 610 + 52*j);
      send(OP_VVMUL, 610, 490);
      send(OP_ADDROUND, 538, 800 + 64*i);
    end
    for (int i = 0; i < 48; i++) sk[i] = mem(490 + i);
    for (int i = 0; i < 3; i++) begin
      pack10(800 + 64*i, p);
      for (int w = 0; w < 40; w++) pkb[40*i + w] = p[w];
    end
  endtask

  task automatic encaps;
    logic [63:0] p [40];
    clear_mem();
    dut.u_sram.mem[0] = desc(0, 4, 4);
    for (int i = 0; i < 4; i++) dut.u_sram.mem[1 + i] = rnd(40 + i);
    dut.u_sram.mem[5] = desc(0, 124, 4);
    for (int i = 0; i < 4; i++) dut.u_sram.mem[6 + i] = seedw[i];
    for (int i = 0; i < 120; i++) dut.u_sram.mem[10 + i] = pkb[i];
    dut.u_sram.mem[912] = desc(1, 8, 8);
    send(OP_SHA, 0, 913);                                // hashed message
    send(OP_SHA, 5, 917);                                // H(pk)
    for (int i = 0; i < 4; i++) begin mh[i] = mem(913 + i); hpk[i] = mem(917 + i); end
    send(OP_SHA, 912, 921);
    send(OP_MEM_WR, 924, 0, desc(2, 4, 96));
    send(OP_MEM_WR, 5, 0, desc(2, 4, 468));
    send(OP_SHA, 5, 130);
    send(OP_SHA, 924, 720);
    for (int l = 0; l < 3; l++) send(OP_SAMPLER, 720 + 32*l, 600 + 16*l);
    for (int i = 0; i < 3; i++) begin
      send(OP_VVMUL, 130 + 156*i, 600);
      send(OP_ADDROUND, 648, 720 + 64*i);
    end
    send(OP_VVMUL_P, 10, 600);
    send(OP_ADDPACK, 648, 913);
    for (int i = 0; i < 3; i++) begin
      pack10(720 + 64*i, p);
      for (int w = 0; w < 40; w++) ctb[40*i + w] = p[w];
    end
    for (int i = 0; i < 16; i++) ctc[i] = mem(917 + i);
  endtask

  // one decapsulation of (ctb, ctc), with bit `flip` of c_m inverted if >= 0
  task automatic decaps(input int flip, input bit timeit);
    logic [63:0] mp [4], kp [4];
    logic [63:0] c [16];
    for (int i = 0; i < 16; i++) c[i] = ctc[i];
    if (flip >= 0) c[flip/64][flip%64] ^= 1'b1;
    clear_mem();
    // secret key, public key and ciphertext as the host delivers them
    for (int i = 0; i < 4; i++) dut.u_sram.mem[HS + 5 + i] = hpk[i];
    dut.u_sram.mem[HS] = desc(1, 8, 8);
    dut.u_sram.mem[SD] = desc(2, 4, 468);
    for (int i = 0; i < 4; i++) dut.u_sram.mem[SD + 1 + i] = seedw[i];
    for (int i = 0; i < 120; i++) dut.u_sram.mem[PB + i] = pkb[i];
    for (int i = 0; i < 48; i++) dut.u_sram.mem[S0 + i] = sk[i];
    for (int i = 0; i < 120; i++) dut.u_sram.mem[CT + i] = ctb[i];
    for (int i = 0; i < 16; i++) dut.u_sram.mem[SC + 68 + i] = c[i];
    for (int i = 0; i < 4; i++) begin z[i] = rnd(80 + i); dut.u_sram.mem[ZZ + i] = z[i]; end
    timing = timeit;

    // decryption
    send(OP_VVMUL_P, CT, S0);
    for (int k = 0; k < 256; k++) begin
      int v, cm;
      v = int'(mem(S0 + 48 + k/4)[16*(k%4) +: 16]);
      cm = int'(c[k/16][4*(k%16) +: 4]);
      mp[k/64][k%64] = 1'(((v + 228 - 64*cm) & 1023) >> 9);
    end
    if (flip < 0)
      for (int i = 0; i < 4; i++) chk(mp[i] == mh[i], $sformatf("decrypted message word %0d", i));
    for (int i = 0; i < 4; i++) begin
      send(OP_MEM_WR, HS + 1 + i, 0, mp[i]);
      send(OP_MEM_WR, SC + 64 + i, 0, mp[i]);
    end

    // re-encryption
    send(OP_SHA, HS, HS + 9);
    for (int i = 0; i < 4; i++) kp[i] = mem(HS + 9 + i);
    send(OP_MEM_WR, HS + 12, 0, desc(2, 4, 96));
    send(OP_SHA, HS + 12, A0);
    for (int l = 0; l < 3; l++) send(OP_SAMPLER, A0 + 32*l, S0 + 16*l);
    send(OP_VVMUL_P, PB, S0);
    for (int i = 0; i < 4; i++) send(OP_MEM_WR, PB + 64 + i, 0, mp[i]);
    send(OP_ADDPACK, S0 + 48, PB + 64);
    send(OP_SHA, SD, A0);
    send(OP_VERIFY, SC, SC);                             // clear the flag
    for (int i = 0; i < 3; i++) begin
      int dst;
      dst = (i < 2) ? R01 : PB;
      send(OP_VVMUL, A0 + 156*i, S0);
      send(OP_ADDROUND, S0 + 48, dst);
      send(OP_UNPACK, CT + 40*i, SC);
      send(OP_VERIFY, SC, dst);
      if (i == 2) send(OP_VERIFY, SC + 20, dst + 20);    // row 2 tail, m', c_m
    end
    chk(dut.flag == (flip >= 0), $sformatf("verify flag %0d for flip %0d", dut.flag, flip));
    send(OP_CMOV, ZZ, HS + 9);
    for (int i = 0; i < 3; i++)
      chk(mem(HS + 9 + i) == ((flip >= 0) ? z[i] : kp[i]), $sformatf("key word %0d after CMOV", i));
    timing = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    keygen();
    encaps();
    decaps(-1, 1'b1);
    $display("decapsulation: %0d core cycles; reported for the whole operation: %0d",
             core_cycles, PAPER_CYCLES);
    chk(core_cycles <= PAPER_CYCLES, "cycle count within the reported decapsulation time");
    decaps(37, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
