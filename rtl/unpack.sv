// unpack: the Unpack unit (BS2POLVECp of Saber).  Turns a polynomial of
// 256 coefficients of 10 bits, bit-packed in 40 words at Offset1, into 64
// words of four 16-bit lanes at Offset2.  The packed stream is decoded by
// bit_unpacker (port A reads) four coefficients per cycle; each beat is
// written on port B in the same cycle.  About 66 cycles.
module unpack
  import saber_pkg::*;
#(
  parameter int unsigned W = 10
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
  localparam int unsigned NWORDS = 256 * W / 64;

  logic          rd, ov;
  logic [AW-1:0] raddr, dst;
  logic [4*W-1:0] beat;
  logic [5:0]    k;

  bit_unpacker #(.W(W), .K(4), .NWORDS(NWORDS), .NBEATS(64)) u_unp (
    .clk, .rst_n, .start, .base(off1), .rd_en(rd), .rd_addr(raddr), .rd_data(a_rdata),
    .out_valid(ov), .out(beat), .done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; dst <= '0;
    end else if (start) begin
      k <= '0; dst <= off2;
    end else if (ov) begin
      k <= k + 1'b1;
    end
  end

  always_comb begin
    logic [DW-1:0] w;
    for (int i = 0; i < 4; i++) w[16*i +: 16] = 16'(beat[W*i +: W]);
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (rd) begin a_req.en = 1'b1; a_req.addr = raddr; end
    if (ov) b_req = '{en: 1'b1, we: 1'b1, addr: dst + AW'(k), wdata: w};
  end

  logic unused;
  assign unused = ^b_rdata;
endmodule
