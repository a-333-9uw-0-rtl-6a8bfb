// verify: the Verify unit of decapsulation.  Reads LEN words from Offset1
// (port A) and Offset2 (port B) in parallel and ORs every difference into a
// sticky flag: flag = 1 means the regions differed.  The flag keeps its
// value across instructions so that a long ciphertext can be compared in
// several calls; an instruction with Offset1 == Offset2 clears it (this
// clear encoding is this design's own).  LEN + 1 cycles; compare time does
// not depend on the data.
module verify
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
  output logic          flag,
  output logic          done
);
  logic       run, cv, last_c;
  logic [7:0] k;
  logic [AW-1:0] p1, p2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cv <= 1'b0; last_c <= 1'b0; k <= '0; p1 <= '0; p2 <= '0; flag <= 1'b0;
    end else begin
      cv     <= run;
      last_c <= run && (k == 8'(LEN - 1));
      if (start && !run) begin
        run <= 1'b1; k <= '0; p1 <= off1; p2 <= off2;
        if (off1 == off2) flag <= 1'b0;
      end else if (run) begin
        k <= k + 1'b1;
        if (k == 8'(LEN - 1)) run <= 1'b0;
      end
      if (cv && (a_rdata != b_rdata)) flag <= 1'b1;
    end
  end

  always_comb begin
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (run) begin
      a_req.en = 1'b1; a_req.addr = p1 + AW'(k);
      b_req.en = 1'b1; b_req.addr = p2 + AW'(k);
    end
    done = cv && last_c;
  end
endmodule
