// bit_unpacker: shift-register decoder for bit-packed polynomials.
// Coefficients of W bits are packed back to back, least significant bit
// first, in 64-bit memory words (the byte-string format of Saber).  Starting
// at word address `base`, the unpacker reads NWORDS words and emits NBEATS
// beats of K consecutive coefficients (K*W bits) each.  A 128-bit buffer
// holds unread bits: every cycle it may hand out one beat and take in the
// word requested the cycle before; a new word is requested only when it is
// sure to fit after the next beat has left.  With W = 13 this is the "A coeffs decoder" (shift register
// plus select), with W = 4 it feeds the secret decoder, with W = 10 it is
// the Unpack unit.  Memory reads have one cycle of latency; `out` is valid
// in the cycle `out_valid` is high, and `done` pulses with the last beat.
module bit_unpacker
  import saber_pkg::*;
#(
  parameter int unsigned W      = 13,
  parameter int unsigned K      = 4,
  parameter int unsigned NWORDS = 52,
  parameter int unsigned NBEATS = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [AW-1:0]   base,
  output logic            rd_en,
  output logic [AW-1:0]   rd_addr,
  input  logic [DW-1:0]   rd_data,
  output logic            out_valid,
  output logic [K*W-1:0]  out,
  output logic            done
);
  localparam int unsigned KW = K * W;
  localparam int unsigned BW = 128;

  logic [BW-1:0] buffer;
  logic [7:0]    cnt, cnt_ae, cnt_new, cnt_room;
  logic          pend, active;
  logic [AW-1:0] raddr;
  logic [15:0]   words_left, beats_left;

  always_comb begin
    out_valid = active && (cnt >= 8'(KW));
    out       = buffer[KW-1:0];
    cnt_ae    = cnt - (out_valid ? 8'(KW) : 8'd0);
    cnt_new   = cnt_ae + (pend ? 8'd64 : 8'd0);
    // the word requested now is appended next cycle, after that cycle's beat
    cnt_room  = cnt_new - ((cnt_new >= 8'(KW)) ? 8'(KW) : 8'd0);
    rd_en     = active && (words_left != 0) && ({1'b0, cnt_room} + 9'd64 <= 9'(BW));
    rd_addr   = raddr;
    done      = out_valid && (beats_left == 16'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buffer <= '0; cnt <= '0; pend <= 1'b0; active <= 1'b0;
      raddr <= '0; words_left <= '0; beats_left <= '0;
    end else if (start) begin
      buffer <= '0; cnt <= '0; pend <= 1'b0; active <= 1'b1;
      raddr <= base; words_left <= 16'(NWORDS); beats_left <= 16'(NBEATS);
    end else if (active) begin
      logic [BW-1:0] nb;
      nb = out_valid ? (buffer >> KW) : buffer;
      if (pend) nb = nb | ({64'b0, rd_data} << cnt_ae);
      buffer <= nb;
      cnt    <= cnt_new;
      pend   <= rd_en;
      if (rd_en) begin
        raddr      <= raddr + 1'b1;
        words_left <= words_left - 1'b1;
      end
      if (out_valid) begin
        beats_left <= beats_left - 1'b1;
        if (beats_left == 16'd1) active <= 1'b0;
      end
    end
  end
endmodule
