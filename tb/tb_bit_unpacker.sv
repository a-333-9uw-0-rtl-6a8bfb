// tb_bit_unpacker: unpacks a random 13-bit packed polynomial (52 words,
// 64 beats of four coefficients) and, in a second instance, a 10-bit one
// (40 words, the public-key format) from behavioural memories with one
// cycle of read latency and compares each beat; also checks the beat rate
// (at most 66 cycles for 64 beats) and the single done pulse.
module tb_bit_unpacker;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] base = '0, rd_addr;
  logic rd_en, out_valid, done;
  logic [DW-1:0] rd_data;
  logic [51:0] out;
  logic [63:0] mem [64];
  logic [13*256-1:0] bits;
  int checks = 0, failures = 0, beat = 0, cyc = 0, done_seen = 0, last_cyc = 0, last_cyc10 = 0;
  always #5 clk = ~clk;
  bit_unpacker #(.W(13), .K(4), .NWORDS(52), .NBEATS(64)) dut (.*);

  // 10-bit instance
  logic [AW-1:0] rd_addr10;
  logic rd_en10, out_valid10, done10;
  logic [DW-1:0] rd_data10;
  logic [39:0] out10;
  logic [63:0] mem10 [64];
  logic [10*256-1:0] bits10;
  int beat10 = 0, done_seen10 = 0;
  bit_unpacker #(.W(10), .K(4), .NWORDS(40), .NBEATS(64)) dut10 (
    .clk, .rst_n, .start, .base, .rd_en(rd_en10), .rd_addr(rd_addr10), .rd_data(rd_data10),
    .out_valid(out_valid10), .out(out10), .done(done10));
  always @(posedge clk) if (rd_en10) rd_data10 <= mem10[rd_addr10[5:0] - 6'd10];
  // clock edges since the one that took `start`
  always @(posedge clk) cyc <= start ? 0 : cyc + 1;

  always @(negedge clk) begin
    if (out_valid10) begin
      checks++;
      if (out10 != bits10[40*beat10 +: 40]) begin failures++; $display("FAIL 10-bit beat %0d", beat10); end
      beat10++;
      last_cyc10 = cyc;
    end
    if (done10) done_seen10++;
  end

  always @(posedge clk) if (rd_en) rd_data <= mem[rd_addr[5:0] - 6'd10];

  always @(negedge clk) begin
    if (out_valid) begin
      checks++;
      if (out != bits[52*beat +: 52]) begin failures++; $display("FAIL beat %0d", beat); end
      beat++;
      last_cyc = cyc;
    end
    if (done) done_seen++;
  end

  initial begin
    for (int i = 0; i < 256; i++) bits[13*i +: 13] = 13'($urandom());
    for (int w = 0; w < 52; w++) mem[w] = bits[64*w +: 64];
    for (int i = 0; i < 256; i++) bits10[10*i +: 10] = 10'($urandom());
    for (int w = 0; w < 40; w++) mem10[w] = bits10[64*w +: 64];
    repeat (2) @(negedge clk);
    rst_n = 1;
    base = 10'd10;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (80) @(negedge clk);
    checks++;
    if (beat != 64 || done_seen != 1) begin failures++; $display("FAIL beats %0d done %0d", beat, done_seen); end
    checks++;
    if (last_cyc > 66 || last_cyc10 > 66) begin failures++; $display("FAIL rate: last beat at %0d / %0d", last_cyc, last_cyc10); end
    $display("last beat after %0d (13-bit) and %0d (10-bit) cycles", last_cyc, last_cyc10);
    checks++;
    if (beat10 != 64 || done_seen10 != 1) begin failures++; $display("FAIL 10-bit beats %0d done %0d", beat10, done_seen10); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
