// serial_to_parallel: scan-chain shift register of the chip interface.
// While `scan_en` is high one bit enters per clock at the top (bit LEN-1)
// and the whole frame moves one place towards bit 0, which drives
// `scan_out`; after LEN clocks a full frame has entered and the previous
// one has left.  `capture` loads `cap_data` in parallel (status to be read
// out); `frame` is the parallel view.  The length, 207 bits, is the chip's
// scan chain; shift direction and capture are this design's choice.
module serial_to_parallel #(
  parameter int unsigned LEN = 207
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           scan_en,
  input  logic           scan_in,
  output logic           scan_out,
  input  logic           capture,
  input  logic [LEN-1:0] cap_data,
  output logic [LEN-1:0] frame
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       frame <= '0;
    else if (capture) frame <= cap_data;
    else if (scan_en) frame <= {scan_in, frame[LEN-1:1]};
  end
  assign scan_out = frame[0];
endmodule
