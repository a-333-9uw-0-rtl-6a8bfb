// copy_words: the CopyWords unit.  Copies LEN 64-bit words from Offset1 to
// Offset2 through the bus: a read on SRAM port A every cycle, the word
// written on port B one cycle later.  LEN + 1 cycles; `done` pulses with
// the last write.  The length (one polynomial of 16-bit lanes) is this
// design's choice; the instruction carries none.
module copy_words
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
  logic          run, wv;
  logic [7:0]    k;
  logic [AW-1:0] src, dst, waddr;
  logic          last_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; wv <= 1'b0; k <= '0; src <= '0; dst <= '0; waddr <= '0; last_w <= 1'b0;
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
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (run) begin a_req.en = 1'b1; a_req.addr = src + AW'(k); end
    if (wv)  b_req = '{en: 1'b1, we: 1'b1, addr: waddr, wdata: a_rdata};
    done = wv && last_w;
  end

  logic unused;
  assign unused = ^b_rdata;
endmodule
