// cmov: constant-time conditional move.  For each of LEN words it reads the
// source (Offset1, port A) and the destination (Offset2, port B), then
// writes back to the destination the source if `flag` is set and the old
// destination word otherwise.  Every word is read and written whatever
// the flag, so time and access pattern do not reveal it (as decapsulation
// needs after Verify).  Two cycles per word, 2*LEN cycles in all.
module cmov
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
  input  logic          flag,
  output logic          done
);
  logic       run, ph;
  logic [7:0] k;
  logic [AW-1:0] p1, p2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; ph <= 1'b0; k <= '0; p1 <= '0; p2 <= '0;
    end else if (start && !run) begin
      run <= 1'b1; ph <= 1'b0; k <= '0; p1 <= off1; p2 <= off2;
    end else if (run) begin
      ph <= ~ph;
      if (ph) begin
        k <= k + 1'b1;
        if (k == 8'(LEN - 1)) run <= 1'b0;
      end
    end
  end

  always_comb begin
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (run && !ph) begin
      a_req.en = 1'b1; a_req.addr = p1 + AW'(k);
      b_req.en = 1'b1; b_req.addr = p2 + AW'(k);
    end else if (run && ph) begin
      b_req = '{en: 1'b1, we: 1'b1, addr: p2 + AW'(k), wdata: flag ? a_rdata : b_rdata};
    end
    done = run && ph && (k == 8'(LEN - 1));
  end
endmodule
