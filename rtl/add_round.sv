// add_round: the AddRound unit.  Rounds polynomial coefficients from
// modulus q = 2^13 to p = 2^10, as in the Saber key generation and
// encryption: c = ((x mod 2^13) + h1) >> 3 with h1 = 4.  Words hold four
// 16-bit lanes.  It reads LEN words from Offset1 (port A) and writes the
// rounded words to Offset2 (port B) one cycle later; LEN + 1 cycles.
module add_round
  import saber_pkg::*;
#(
  parameter int unsigned LEN = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] off1,
  input  logic [AW-1:0] off2,
  output mem_req_t      a_req,
  input  logic [DW-1:0] a_rdata,
  output mem_req_t      b_req,
  input  logic [DW-1:0] b_rdata,
  output logic          done
);
  logic       run, wv, last_w;
  logic [7:0] k;
  logic [AW-1:0] src, dst, waddr;
  logic [DW-1:0] rounded;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; wv <= 1'b0; last_w <= 1'b0; k <= '0; src <= '0; dst <= '0; waddr <= '0;
    end else begin
      wv     <= run;
      waddr  <= dst + AW'(k);
      last_w <= run && (k == 8'(LEN - 1));
      if (start && !run) begin
        run <= 1'b1; k <= '0; src <= off1; dst <= off2;
      end else if (run) begin
        k <= k + 1'b1;
        if (k == 8'(LEN - 1)) run <= 1'b0;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      logic [EQ-1:0] x;
      logic [EQ-1:0] y;
      x = a_rdata[16*i +: EQ];
      y = x + EQ'(H1);
      rounded[16*i +: 16] = 16'(y >> (EQ - EP));
    end
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (run) begin a_req.en = 1'b1; a_req.addr = src + AW'(k); end
    if (wv)  b_req = '{en: 1'b1, we: 1'b1, addr: waddr, wdata: rounded};
    done = wv && last_w;
  end

  logic unused;
  assign unused = ^b_rdata;
endmodule
