// point_mul: one point multiplier of the striding Toom-Cook multiplier.
// It multiplies two 64-coefficient polynomials modulo (y^64 + 1): A with
// 16-bit coefficients and B with 8-bit signed ones, and adds the product
// into the C polynomial held in the cache (or, with accumulate = 0, writes
// it there, the old contents being ignored).
//
// NMAC multiply-accumulate units work on NMAC coefficients of B at a time
// (b_j..b_j+NMAC-1, one pass per group, 64/NMAC passes).  In a pass each
// coefficient a_t is broadcast to all MACs and the partial sums travel down
// a chain of registers res[NMAC-1] -> ... -> res[0]: res[k] holds output
// index t+j+k, res[NMAC-1] is seeded with the old C coefficient and res[0]
// is written back.  An output index m above 63 wraps with a sign change
// (y^64 = -1): bit 6 of m selects two's complement of the value read and
// of the value written, and bits 5:0 give the cache address.
//
// Pass schedule (cycle s of a pass): B is read two coefficients per cycle
// for NMAC/2 cycles; A and C reads are issued for t = -(NMAC-1) .. 63+NMAC-1
// (a_t = 0 outside 0..63), each read answered one cycle later, and res[0]
// written one cycle after that.  A pass thus lasts NMAC/2 + 2*NMAC + 63
// cycles, and the whole product 64/NMAC * (NMAC/2 + NMAC + 64 + NMAC-1)
// cycles: 1168 for NMAC = 4.  `done` is high in the last cycle.
module point_mul #(
  parameter int unsigned NMAC = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        accumulate,
  output logic        a_re,
  output logic [5:0]  a_addr,
  input  logic [15:0] a_data,
  output logic        b_re,
  output logic [4:0]  b_addr,     // word k holds b_2k (low byte) and b_2k+1
  input  logic [15:0] b_data,
  output logic        c_re,
  output logic [5:0]  c_raddr,
  input  logic [15:0] c_rdata,
  output logic        c_we,
  output logic [5:0]  c_waddr,
  output logic [15:0] c_wdata,
  output logic        busy,
  output logic        done
);
  localparam int NPASS    = 64 / NMAC;
  localparam int LB       = NMAC / 2;               // B load cycles
  localparam int NSTREAM  = 64 + 2 * (NMAC - 1);    // issued t values
  localparam int PASS_LEN = LB + 2 * NMAC + 63;

  initial assert (NMAC >= 2 && NMAC % 2 == 0 && 64 % NMAC == 0)
    else $error("point_mul: NMAC must be even and divide 64");

  logic [7:0]  s;           // cycle within pass
  logic [5:0]  pass;
  logic        acc_q;
  logic [NMAC-1:0][7:0]  b_reg;
  logic [NMAC-1:0][15:0] res;

  // stage 1: reads issued this cycle
  int          u, t;
  logic [6:0]  m;           // output index of res[NMAC-1] (0..126)
  logic [6:0]  j;
  logic        issue;

  // stage 2 registers: what the answered reads belong to
  logic        v2, a_ok2, c_ok2, c_zero2, c_neg2;
  logic        b_cap2;
  logic [7:0]  b_idx2;
  int          t_q2;        // t and j of the reads being answered
  logic [6:0]  j_q2;
  // stage 3: res[0] holds index t+j
  logic        w3;
  logic [6:0]  widx3;

  always_comb begin
    j      = 7'(pass) * 7'(NMAC);
    u      = int'(s) - (LB - 1);
    t      = u - (NMAC - 1);
    issue  = busy && (u >= 0) && (u < NSTREAM);
    m      = 7'(t + int'(j) + NMAC - 1);
    a_re   = issue && (t >= 0) && (t <= 63);
    a_addr = 6'(t);
    c_re   = issue && (t <= 63);
    c_raddr = m[5:0];
    b_re   = busy && (s < 8'(LB));
    b_addr = 5'(int'(j) / 2 + int'(s));
    c_we    = w3;
    c_waddr = widx3[5:0];
    c_wdata = widx3[6] ? (~res[0] + 16'd1) : res[0];
    done    = busy && (pass == 6'(NPASS - 1)) && (s == 8'(PASS_LEN - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; s <= '0; pass <= '0; acc_q <= 1'b0;
      b_reg <= '0; res <= '0;
      v2 <= 1'b0; a_ok2 <= 1'b0; c_ok2 <= 1'b0; c_zero2 <= 1'b0; c_neg2 <= 1'b0;
      b_cap2 <= 1'b0; b_idx2 <= '0; w3 <= 1'b0; widx3 <= '0;
    end else begin
      if (start && !busy) begin
        busy <= 1'b1; s <= '0; pass <= '0; acc_q <= accumulate;
      end else if (busy) begin
        if (s == 8'(PASS_LEN - 1)) begin
          s <= '0;
          pass <= pass + 1'b1;
          if (done) busy <= 1'b0;
        end else begin
          s <= s + 1'b1;
        end
      end
      // stage 2 bookkeeping
      v2      <= issue;
      a_ok2   <= a_re;
      c_ok2   <= c_re;
      c_zero2 <= !acc_q && (pass == 0) && (m < 7'd64);
      c_neg2  <= m[6];
      b_cap2  <= b_re;
      b_idx2  <= s;
      // capture B
      if (b_cap2) b_reg[2*b_idx2 +: 2] <= {b_data[15:8], b_data[7:0]};
      // MAC chain
      if (v2) begin
        logic [15:0] a_v, top;
        a_v = a_ok2 ? a_data : 16'd0;
        top = (!c_ok2 || c_zero2) ? 16'd0 : (c_neg2 ? (~c_rdata + 16'd1) : c_rdata);
        for (int k = 0; k < NMAC; k++) begin
          logic [15:0] prod, prev;
          prod = 16'(a_v * {{8{b_reg[k][7]}}, b_reg[k]});
          prev = (k == NMAC - 1) ? top : res[k+1];
          res[k] <= prev + prod;
        end
      end
      // stage 3: res[0] valid for t >= 0
      w3    <= v2 && (t_q2 >= 0);
      widx3 <= 7'(t_q2 + int'(j_q2));
    end
  end

  // t and j of the reads being answered
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q2 <= 0; j_q2 <= '0;
    end else begin
      t_q2 <= t;
      j_q2 <= j;
    end
  end
endmodule
