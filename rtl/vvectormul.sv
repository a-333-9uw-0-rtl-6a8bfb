// vvectormul: vector-vector polynomial multiplier, the core of Saber.
// Computes r(x) = sum_{n<L} A_n(x) * s_n(x) mod (x^256 + 1) and mod 2^13,
// where the A_n have 13-bit coefficients and the s_n small secrets.
//
// Striding Toom-Cook-4: with y = x^4 every polynomial is split as
// A(x) = A0(y) + x A1(y) + x^2 A2(y) + x^3 A3(y), where Aj holds the
// coefficients a_{4t+j}, t = 0..63.  Since x^256 + 1 = y^64 + 1, the seven
// Toom-Cook point products are negacyclic 64x64 products and need only 64
// words of storage each.  After interpolation the seven product parts
// C0..C6 fold back as  R_j = C_j + y*C_{j+4} (j < 3),  R_3 = C_3,  and the
// coefficients 4t..4t+3 of the result are R_0..R_3 at index t: exactly one
// 64-bit output word per t.
//
// Flow (vvmul_fsm): Load A_n streams the packed A_n through the 13-bit
// decoder and the evaluation data path into the cache, one index (four
// coefficients) per cycle; Load B_n does the same for the secret (4-bit
// sign-magnitude, converted to two's complement, 8-bit evaluation);
// Eval Mul_n runs seven point multipliers in parallel, 1168 cycles, adding
// into the C cache for n > 0; after the last pair Interp reads C, runs the
// interpolation pipeline and writes the 64 result words (70 cycles).
//
// Operand mode (this design's own choice): with pmode = 0 the public
// polynomials are 13-bit packed (mod q, 52 words each); with pmode = 1 they
// are 10-bit packed (mod p, 40 words each, the public-key and ciphertext
// format), as needed for b^T s' and b'^T s.  Two decoders sit side by side
// and the mode selects which one feeds the evaluation data path; the rest
// of the multiplier is the same, and a mod-p result is the low 10 bits of
// the mod-q one.
//
// Memory layout (this design's own): Offset1 = L packed A polynomials of 52
// (or 40) words each; Offset2 = L secret polynomials of 16 words each; the result,
// four 16-bit lanes per word holding coefficients mod 2^13, is written to
// the 64 words from Offset2 + 16*L.  Reads use SRAM port A, result writes
// port B (and port A for word 0, which is written last because it needs
// C4..C6 at index 63).  `done` pulses when the last word is written.
module vvectormul
  import saber_pkg::*;
#(
  parameter int unsigned L    = 3,
  parameter int unsigned NMAC = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          pmode,    // A operands 10-bit packed (mod p)
  input  logic [AW-1:0] off1,
  input  logic [AW-1:0] off2,
  output mem_req_t      a_req,
  input  logic [DW-1:0] a_rdata,
  output mem_req_t      b_req,
  input  logic [DW-1:0] b_rdata,
  output vv_state_e     state,
  output logic          done
);
  localparam int unsigned A_WORDS = 52;   // 256 x 13 bit
  localparam int unsigned P_WORDS = 40;   // 256 x 10 bit
  localparam int unsigned S_WORDS = 16;   // 256 x 4 bit

  logic       go;
  logic [1:0] n;
  logic       a_done, b_done, m_done, i_done;
  logic [AW-1:0] off1_q, off2_q;
  logic          pmode_q, pm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      off1_q <= '0; off2_q <= '0; pmode_q <= 1'b0;
    end else if (start && state == VV_IDLE) begin
      off1_q <= off1; off2_q <= off2; pmode_q <= pmode;
    end
  end

  vvmul_fsm #(.L(L)) u_fsm (
    .clk, .rst_n, .start, .a_done, .b_done, .m_done, .i_done,
    .state, .go, .n, .done
  );

  wire go_a = go && (state == VV_IDLE || (state == VV_EVAL_MUL && n != 2'(L - 1)));
  wire go_b = go && state == VV_LOAD_A;
  wire go_m = go && state == VV_LOAD_B;
  wire go_i = go && state == VV_EVAL_MUL && n == 2'(L - 1);

  // ---------------- A coefficient decoder + evaluation -----------------
  logic           ua_rd, ua_v;
  logic [AW-1:0]  ua_addr;
  logic [AW-1:0]  a_base;
  logic [1:0]     n_next;

  always_comb begin
    n_next = (state == VV_IDLE) ? 2'd0 : n + 2'd1;
    pm     = (state == VV_IDLE) ? pmode : pmode_q;
    a_base = (state == VV_IDLE ? off1 : off1_q) +
             AW'(n_next) * (pm ? AW'(P_WORDS) : AW'(A_WORDS));
  end

  // two shift-register decoders, 13-bit (mod q) and 10-bit (mod p)
  // operands; the mode selects which one is started and read
  logic           uq_rd, uq_v, uq_done, up_rd, up_v, up_done;
  logic [AW-1:0]  uq_addr, up_addr;
  logic [51:0]    uq_out;
  logic [39:0]    up_out;

  bit_unpacker #(.W(13), .K(4), .NWORDS(A_WORDS), .NBEATS(64)) u_adec (
    .clk, .rst_n, .start(go_a && !pm), .base(a_base),
    .rd_en(uq_rd), .rd_addr(uq_addr), .rd_data(a_rdata),
    .out_valid(uq_v), .out(uq_out), .done(uq_done)
  );

  bit_unpacker #(.W(10), .K(4), .NWORDS(P_WORDS), .NBEATS(64)) u_pdec (
    .clk, .rst_n, .start(go_a && pm), .base(a_base),
    .rd_en(up_rd), .rd_addr(up_addr), .rd_data(a_rdata),
    .out_valid(up_v), .out(up_out), .done(up_done)
  );

  logic [3:0][15:0] a_coef;
  logic [6:0][15:0] a_aw;
  always_comb begin
    ua_rd   = pm ? up_rd   : uq_rd;
    ua_addr = pm ? up_addr : uq_addr;
    ua_v    = pm ? up_v    : uq_v;
    a_done  = pm ? up_done : uq_done;
    for (int k = 0; k < 4; k++)
      a_coef[k] = pm ? {6'b0, up_out[10*k +: 10]} : {3'b000, uq_out[13*k +: 13]};
  end

  toom_eval #(.W(16)) u_eval_a (.a(a_coef), .aw(a_aw));

  // ---------------- secret decoder + evaluation ------------------------
  logic           us_rd, us_v;
  logic [AW-1:0]  us_addr;
  logic [15:0]    us_out;

  bit_unpacker #(.W(4), .K(4), .NWORDS(S_WORDS), .NBEATS(64)) u_sdec (
    .clk, .rst_n, .start(go_b), .base(off2_q + AW'(n) * AW'(S_WORDS)),
    .rd_en(us_rd), .rd_addr(us_addr), .rd_data(a_rdata),
    .out_valid(us_v), .out(us_out), .done(b_done)
  );

  logic [3:0][7:0] s_coef;
  logic [6:0][7:0] s_aw, s_hold;
  logic [5:0]      a_idx, b_idx;

  for (genvar k = 0; k < 4; k++) begin : g_sm
    sm_to_2c #(.OW(8)) u_sm (.sm(us_out[4*k +: 4]), .tc(s_coef[k]));
  end
  toom_eval #(.W(8)) u_eval_b (.a(s_coef), .aw(s_aw));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_idx <= '0; b_idx <= '0; s_hold <= '0;
    end else begin
      if (go_a) a_idx <= '0; else if (ua_v) a_idx <= a_idx + 1'b1;
      if (go_b) b_idx <= '0; else if (us_v) b_idx <= b_idx + 1'b1;
      if (us_v && !b_idx[0]) s_hold <= s_aw;
    end
  end

  // ---------------- point multipliers ---------------------------------
  logic [6:0]       pm_are, pm_bre, pm_cre, pm_cwe, pm_busy, pm_done;
  logic [6:0][5:0]  pm_aaddr, pm_craddr, pm_cwaddr;
  logic [6:0][4:0]  pm_baddr;
  logic [6:0][15:0] pm_cwdata;
  logic [111:0]     ab0_rdata, ab1_rdata, c_rdata;

  for (genvar i = 0; i < 7; i++) begin : g_pm
    point_mul #(.NMAC(NMAC)) u_pm (
      .clk, .rst_n, .start(go_m), .accumulate(n != 2'd0),
      .a_re(pm_are[i]), .a_addr(pm_aaddr[i]), .a_data(ab1_rdata[16*i +: 16]),
      .b_re(pm_bre[i]), .b_addr(pm_baddr[i]), .b_data(ab0_rdata[16*i +: 16]),
      .c_re(pm_cre[i]), .c_raddr(pm_craddr[i]), .c_rdata(c_rdata[16*i +: 16]),
      .c_we(pm_cwe[i]), .c_waddr(pm_cwaddr[i]), .c_wdata(pm_cwdata[i]),
      .busy(pm_busy[i]), .done(pm_done[i])
    );
  end
  assign m_done = pm_done[0];

  // ---------------- interpolation -------------------------------------
  logic       irun, iv;
  logic [5:0] ic, oc;
  logic       zv;
  logic [6:0][15:0] wv, z;
  logic [2:0][15:0] z_prev;   // C4..C6 of the previous index
  logic [3:0][15:0] z0_hold;  // C0..C3 of index 0

  always_comb
    for (int k = 0; k < 7; k++) wv[k] = c_rdata[16*k +: 16];

  toom_interp u_interp (.clk, .rst_n, .in_valid(iv), .w(wv), .out_valid(zv), .z(z));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irun <= 1'b0; ic <= '0; iv <= 1'b0; oc <= '0; z_prev <= '0; z0_hold <= '0;
    end else begin
      iv <= irun;
      if (go_i) begin
        irun <= 1'b1; ic <= '0; oc <= '0;
      end else if (irun) begin
        ic <= ic + 1'b1;
        if (ic == 6'd63) irun <= 1'b0;
      end
      if (zv) begin
        oc <= oc + 1'b1;
        z_prev <= z[6:4];
        if (oc == 6'd0) z0_hold <= z[3:0];
      end
    end
  end
  assign i_done = zv && (oc == 6'd63);

  logic [3:0][15:0] rword, rword0;
  always_comb begin
    for (int jj = 0; jj < 3; jj++) begin
      rword[jj]  = z[jj] + z_prev[jj];
      rword0[jj] = z0_hold[jj] - z[jj+4];   // y * C_{j+4}: index 63 wraps to 0, negated
    end
    rword[3]  = z[3];
    rword0[3] = z0_hold[3];
    for (int jj = 0; jj < 4; jj++) begin
      rword[jj]  = rword[jj]  & 16'h1FFF;
      rword0[jj] = rword0[jj] & 16'h1FFF;
    end
  end

  // ---------------- cache ---------------------------------------------
  logic             ab0_en, ab0_we, ab1_en;
  logic [6:0]       ab0_addr, ab1_addr;
  logic [111:0]     ab0_wdata, c_wdata;

  always_comb begin
    ab0_en = 1'b0; ab0_we = 1'b0; ab0_addr = '0; ab0_wdata = '0;
    if (state == VV_LOAD_A && ua_v) begin
      ab0_en = 1'b1; ab0_we = 1'b1; ab0_addr = {1'b0, a_idx};
      for (int i = 0; i < 7; i++) ab0_wdata[16*i +: 16] = a_aw[i];
    end else if (state == VV_LOAD_B && us_v && b_idx[0]) begin
      ab0_en = 1'b1; ab0_we = 1'b1; ab0_addr = 7'd64 + 7'(b_idx[5:1]);
      for (int i = 0; i < 7; i++) ab0_wdata[16*i +: 16] = {s_aw[i], s_hold[i]};
    end else if (pm_bre[0]) begin
      ab0_en = 1'b1; ab0_addr = 7'd64 + 7'(pm_baddr[0]);
    end
    ab1_en   = pm_are[0];
    ab1_addr = {1'b0, pm_aaddr[0]};
    for (int i = 0; i < 7; i++) c_wdata[16*i +: 16] = pm_cwdata[i];
  end

  polymul_cache u_cache (
    .clk,
    .ab0_en, .ab0_we, .ab0_addr, .ab0_wdata, .ab0_rdata,
    .ab1_en, .ab1_addr, .ab1_rdata,
    .c_re(irun | pm_cre[0]), .c_raddr(irun ? ic : pm_craddr[0]), .c_rdata,
    .c_we(pm_cwe[0]), .c_waddr(pm_cwaddr[0]), .c_wdata
  );

  // ---------------- SRAM ports ----------------------------------------
  wire [AW-1:0] res_base = off2_q + AW'(L * S_WORDS);
  always_comb begin
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (ua_rd) begin
      a_req.en = 1'b1; a_req.addr = ua_addr;
    end else if (us_rd) begin
      a_req.en = 1'b1; a_req.addr = us_addr;
    end else if (zv && oc == 6'd63) begin
      a_req = '{en: 1'b1, we: 1'b1, addr: res_base, wdata: rword0};
    end
    if (zv && oc != 6'd0)
      b_req = '{en: 1'b1, we: 1'b1, addr: res_base + AW'(oc), wdata: rword};
  end

  // the seven point multipliers run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (pm_busy == '0 || pm_busy == '1));
endmodule
