// serial_if: serial host interface of the co-processor.  A host shifts a
// 207-bit frame in through the scan chain (serial_to_parallel) and pulses
// `update` to issue the instruction it holds; pulsing `capture` loads the
// status frame, which is then shifted out while the next frame goes in.
// Frame layout (this design's own; only the length is the chip's):
//   [23:0]    instruction            [87:24]   Mem Wr data
//   [151:88]  Mem Rd data (capture)  [152]     busy (capture)
//   [153]     Verify flag (capture)  [206:154] reserved, zero
// `instr_valid` is a registered one-cycle pulse after `update`.
module serial_if
  import saber_pkg::*;
#(
  parameter int unsigned LEN = 207
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          scan_en,
  input  logic          scan_in,
  output logic          scan_out,
  input  logic          capture,
  input  logic          update,
  output instr_t        instr,
  output logic [DW-1:0] wdata,
  output logic          instr_valid,
  input  logic [DW-1:0] rdata,
  input  logic          busy,
  input  logic          flag
);
  logic [LEN-1:0] frame, cap;

  always_comb begin
    cap = '0;
    cap[23:0]    = frame[23:0];
    cap[87:24]   = frame[87:24];
    cap[151:88]  = rdata;
    cap[152]     = busy;
    cap[153]     = flag;
  end

  serial_to_parallel #(.LEN(LEN)) u_s2p (
    .clk, .rst_n, .scan_en, .scan_in, .scan_out, .capture, .cap_data(cap), .frame
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      instr_valid <= 1'b0; instr <= '0; wdata <= '0;
    end else begin
      instr_valid <= update;
      if (update) begin
        instr <= instr_t'(frame[23:0]);
        wdata <= frame[87:24];
      end
    end
  end
endmodule
