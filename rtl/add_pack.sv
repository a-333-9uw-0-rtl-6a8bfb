// add_pack: the AddPack unit of Saber encryption.  For each of the 256
// coefficients v (10-bit, in 16-bit lanes, 64 words at Offset1) and message
// bit m (256 bits, 4 words at Offset2) it computes
//   c = ((v + h1 - m * 2^(EP-1)) mod 2^EP) >> (EP - ET)       (h1 = 4)
// and packs the 4-bit results, 16 per word, into 16 words at Offset2 + 4.
// Per output word: four reads of v and one of the message word on port A,
// then one write on port B: 6 cycles, 96 cycles in all.  The memory layout
// is this design's own.
module add_pack
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
  logic          run;
  logic [2:0]    ph;           // 0..5
  logic [3:0]    o;            // output word
  logic [AW-1:0] src, msg;
  logic [3:0][DW-1:0] v;
  logic [DW-1:0] packed_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; ph <= '0; o <= '0; src <= '0; msg <= '0; v <= '0;
    end else if (start && !run) begin
      run <= 1'b1; ph <= '0; o <= '0; src <= off1; msg <= off2;
    end else if (run) begin
      if (ph >= 3'd1 && ph <= 3'd4) v[ph - 3'd1] <= a_rdata;
      if (ph == 3'd5) begin
        ph <= '0;
        o  <= o + 1'b1;
        if (o == 4'd15) run <= 1'b0;
      end else ph <= ph + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < 16; i++) begin
      logic [EP-1:0] x;
      logic          m;
      x = v[i/4][16*(i%4) +: EP];
      m = a_rdata[16*o[1:0] + 4'(i)];
      x = x + EP'(H1) - {m, {(EP-1){1'b0}}};
      packed_w[4*i +: 4] = x[EP-1 -: ET];
    end
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (run && ph <= 3'd3) begin a_req.en = 1'b1; a_req.addr = src + AW'({o, ph[1:0]}); end
    if (run && ph == 3'd4) begin a_req.en = 1'b1; a_req.addr = msg + AW'(o[3:2]); end
    if (run && ph == 3'd5) b_req = '{en: 1'b1, we: 1'b1, addr: msg + AW'(4) + AW'(o), wdata: packed_w};
    done = run && ph == 3'd5 && o == 4'd15;
  end

  logic unused;
  assign unused = ^b_rdata;
endmodule
