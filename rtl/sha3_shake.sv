// sha3_shake: the SHA3/SHAKE unit, a Keccak sponge running one round of
// Keccak-f[1600] per clock (24 cycles per permutation).  It provides the
// three functions Saber uses: SHA3-256, SHA3-512 and SHAKE-128.
//
// Command (this design's own format): the word at Offset1 is a descriptor,
//   bits  1:0  mode (0 SHA3-256, 1 SHA3-512, 2 SHAKE-128)
//   bits 31:16 number of 64-bit input words, which follow the descriptor
//   bits 47:32 number of 64-bit output words, written from Offset2.
// Inputs are whole words (all Saber hash inputs are multiples of 8 bytes),
// bytes in little-endian order as in FIPS 202.  Input words are read on
// port A and XORed into the rate (17, 9 or 21 lanes), padding is the
// domain byte (0x06 for SHA3, 0x1F for SHAKE) after the message and 0x80
// in the last rate byte; output lanes are written on port B, permuting
// again whenever the rate is used up.  Two cycles per input word, one per
// output word, 24 per permutation.  `done` pulses with the last write.
module sha3_shake
  import saber_pkg::*;
(
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
  typedef enum logic [2:0] {
    S_IDLE, S_DESC, S_ABS_RD, S_ABS_XOR, S_PAD, S_PERM, S_SQZ
  } st_e;

  st_e               st, after_perm;
  logic [24:0][63:0] state, round_out;
  logic [4:0]        rnd;
  logic [4:0]        lane, rate;
  logic [7:0]        dom;
  logic [15:0]       in_left, out_left;
  logic [AW-1:0]     src, dst;

  keccak_round u_round (.st_in(state), .round(rnd), .st_out(round_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; after_perm <= S_IDLE; state <= '0; rnd <= '0; lane <= '0;
      rate <= 5'd17; dom <= 8'h06; in_left <= '0; out_left <= '0; src <= '0; dst <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          src <= off1; dst <= off2; st <= S_DESC;
        end
        S_DESC: begin   // descriptor arrives
          unique case (a_rdata[1:0])
            2'd1:    begin rate <= 5'd9;  dom <= 8'h06; end
            2'd2:    begin rate <= 5'd21; dom <= 8'h1F; end
            default: begin rate <= 5'd17; dom <= 8'h06; end
          endcase
          in_left  <= a_rdata[31:16];
          out_left <= a_rdata[47:32];
          state    <= '0;
          lane     <= '0;
          src      <= src + 1'b1;
          st       <= S_ABS_RD;
        end
        S_ABS_RD: st <= (in_left == 0) ? S_PAD : S_ABS_XOR;
        S_ABS_XOR: begin
          state[lane] <= state[lane] ^ a_rdata;
          src     <= src + 1'b1;
          in_left <= in_left - 1'b1;
          if (lane == rate - 1'b1) begin
            lane <= '0; rnd <= '0; after_perm <= S_ABS_RD; st <= S_PERM;
          end else begin
            lane <= lane + 1'b1; st <= S_ABS_RD;
          end
        end
        S_PAD: begin
          logic [24:0][63:0] ns;
          ns = state;
          ns[lane] = ns[lane] ^ {56'b0, dom};
          ns[rate - 1'b1] = ns[rate - 1'b1] ^ {8'h80, 56'b0};
          state <= ns;
          lane <= '0; rnd <= '0; after_perm <= S_SQZ; st <= S_PERM;
        end
        S_PERM: begin
          state <= round_out;
          rnd   <= rnd + 1'b1;
          if (rnd == 5'd23) st <= after_perm;
        end
        S_SQZ: begin
          if (out_left == 0) st <= S_IDLE;
          else begin
            dst      <= dst + 1'b1;
            out_left <= out_left - 1'b1;
            if (out_left == 16'd1) st <= S_IDLE;
            else if (lane == rate - 1'b1) begin
              lane <= '0; rnd <= '0; after_perm <= S_SQZ; st <= S_PERM;
            end else lane <= lane + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (st == S_IDLE && start) begin a_req.en = 1'b1; a_req.addr = off1; end
    if (st == S_ABS_RD && in_left != 0) begin a_req.en = 1'b1; a_req.addr = src; end
    if (st == S_SQZ && out_left != 0)
      b_req = '{en: 1'b1, we: 1'b1, addr: dst, wdata: state[lane]};
    done = (st == S_SQZ) && (out_left <= 16'd1);
  end

  logic unused;
  assign unused = ^b_rdata;
endmodule
