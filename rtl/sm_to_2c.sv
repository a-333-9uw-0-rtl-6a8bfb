// sm_to_2c: secret coefficient decoder.  Secret polynomial coefficients are
// stored as 4-bit sign-magnitude numbers (bit 3 = sign, bits 2:0 = magnitude,
// range -4..4 for the binomial distribution of Saber); the multiplier needs
// two's complement.  Purely combinational.
module sm_to_2c #(
  parameter int unsigned OW = 8   // output width
) (
  input  logic [3:0]    sm,
  output logic [OW-1:0] tc
);
  logic [OW-1:0] mag;
  always_comb begin
    mag = OW'(sm[2:0]);
    tc  = sm[3] ? (~mag + OW'(1)) : mag;
  end
endmodule
