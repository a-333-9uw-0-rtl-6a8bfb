// polymul_cache: local memory of the polynomial multiplier.
// Two dual-port arrays, 112 bits wide so that one word holds the same
// coefficient index of all seven Toom-Cook points:
//   ab  96 x 112: words 0..63 hold the evaluated A (7 x 16 bit, lane i at
//       bits 16i+15:16i); words 64..95 hold the evaluated secret B, two
//       indices per word (lane i: bits 16i+7:16i index 2k, 16i+15:16i+8
//       index 2k+1).  Port 0 reads or writes, port 1 only reads.
//   c   64 x 112: the seven accumulated point products, one read port and
//       one write port.
// Reads answer one cycle after the request.  Together with the 8 KB data
// SRAM these 64x112 and 96x112 bits make up the 10.1875 KB of the chip.
module polymul_cache #(
  parameter int unsigned AB_DEPTH = 96,
  parameter int unsigned C_DEPTH  = 64,
  parameter int unsigned WIDTH    = 112
) (
  input  logic             clk,
  // ab port 0
  input  logic             ab0_en,
  input  logic             ab0_we,
  input  logic [6:0]       ab0_addr,
  input  logic [WIDTH-1:0] ab0_wdata,
  output logic [WIDTH-1:0] ab0_rdata,
  // ab port 1 (read)
  input  logic             ab1_en,
  input  logic [6:0]       ab1_addr,
  output logic [WIDTH-1:0] ab1_rdata,
  // c read port
  input  logic             c_re,
  input  logic [5:0]       c_raddr,
  output logic [WIDTH-1:0] c_rdata,
  // c write port
  input  logic             c_we,
  input  logic [5:0]       c_waddr,
  input  logic [WIDTH-1:0] c_wdata
);
  logic [WIDTH-1:0] ab [AB_DEPTH];
  logic [WIDTH-1:0] c  [C_DEPTH];

  always_ff @(posedge clk) begin
    if (ab0_en && ab0_we)  ab[ab0_addr] <= ab0_wdata;
    if (ab0_en && !ab0_we) ab0_rdata <= ab[ab0_addr];
    if (ab1_en)            ab1_rdata <= ab[ab1_addr];
  end

  always_ff @(posedge clk) begin
    if (c_we) c[c_waddr] <= c_wdata;
    if (c_re) c_rdata <= c[c_raddr];
  end
endmodule
