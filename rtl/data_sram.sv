// data_sram: the 8 KB dual-port data memory of the co-processor, 1024 words
// of 64 bits.  Both ports read and write; a read returns the word one clock
// after the request (synchronous SRAM).  If both ports write the same word
// in one cycle, port B wins.  The chip uses a low-leakage SRAM macro here;
// this array stands in for it with the same ports and timing.
module data_sram
  import saber_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 64
) (
  input  logic       clk,
  input  mem_req_t   a_req,
  output logic [WIDTH-1:0] a_rdata,
  input  mem_req_t   b_req,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_req.en && a_req.we) mem[a_req.addr] <= a_req.wdata[WIDTH-1:0];
    if (b_req.en && b_req.we) mem[b_req.addr] <= b_req.wdata[WIDTH-1:0];
    if (a_req.en && !a_req.we) a_rdata <= mem[a_req.addr];
    if (b_req.en && !b_req.we) b_rdata <= mem[b_req.addr];
  end
endmodule
