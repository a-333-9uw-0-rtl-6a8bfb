// binomial_sampler: centred binomial sampler of Saber (mu = 8).
// Each pseudo-random byte from SHAKE gives one secret coefficient, the
// Hamming weight of its low four bits minus that of its high four bits, a
// value in -4..4, stored as 4-bit sign-magnitude (bit 3 sign).  The
// conversion is combinational logic; a small sequencer reads the 32 SHAKE
// words of one polynomial at Offset1 on port A (two per output word) and
// writes 16 words of 16 coefficients at Offset2 on port B: 3 cycles per
// output word, 48 in all.
module binomial_sampler
  import saber_pkg::*;
#(
  parameter int unsigned MU = 8
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
  function automatic logic [3:0] sample(input logic [MU-1:0] b);
    logic [3:0] hw_lo, hw_hi, d;
    hw_lo = '0; hw_hi = '0;
    for (int i = 0; i < MU/2; i++) begin
      hw_lo = hw_lo + 4'(b[i]);
      hw_hi = hw_hi + 4'(b[MU/2 + i]);
    end
    d = hw_lo - hw_hi;
    return d[3] ? {1'b1, 3'(-d)} : {1'b0, d[2:0]};
  endfunction

  logic          run;
  logic [1:0]    ph;
  logic [3:0]    o;
  logic [AW-1:0] src, dst;
  logic [DW-1:0] w0, outw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; ph <= '0; o <= '0; src <= '0; dst <= '0; w0 <= '0;
    end else if (start && !run) begin
      run <= 1'b1; ph <= '0; o <= '0; src <= off1; dst <= off2;
    end else if (run) begin
      if (ph == 2'd1) w0 <= a_rdata;
      if (ph == 2'd2) begin
        ph <= '0; o <= o + 1'b1;
        if (o == 4'd15) run <= 1'b0;
      end else ph <= ph + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      outw[4*i +: 4]      = sample(w0[8*i +: 8]);
      outw[32 + 4*i +: 4] = sample(a_rdata[8*i +: 8]);
    end
    a_req = MEM_IDLE;
    b_req = MEM_IDLE;
    if (run && ph != 2'd2) begin a_req.en = 1'b1; a_req.addr = src + AW'({o, ph[0]}); end
    if (run && ph == 2'd2) b_req = '{en: 1'b1, we: 1'b1, addr: dst + AW'(o), wdata: outw};
    done = run && ph == 2'd2 && o == 4'd15;
  end

  logic unused;
  assign unused = ^b_rdata;
endmodule
