// toom_eval: evaluation data path of the striding Toom-Cook-4 multiplier.
// Four coefficients a0..a3 (the same index of the four strided sub-
// polynomials A0..A3) are evaluated at the seven points inf, 2, 1, -1, 1/2,
// -1/2 and 0.  The half points are scaled by 8 so that only integer shifts
// and adds are needed:
//   aw1 = a3                 aw5 = 8a0 + 4a1 + 2a2 + a3
//   aw2 = a0 + 2a1 + 4a2 + 8a3   aw6 = 8a0 - 4a1 + 2a2 - a3
//   aw3 = a0 + a1 + a2 + a3      aw7 = a0
//   aw4 = a0 - a1 + a2 - a3
// All arithmetic is modulo 2^W.  Combinational; aw[i] holds aw(i+1).
module toom_eval #(
  parameter int unsigned W = 16
) (
  input  logic [3:0][W-1:0] a,
  output logic [6:0][W-1:0] aw
);
  logic [W-1:0] s02, s13, h0, h1;
  always_comb begin
    s02   = a[0] + a[2];
    s13   = a[1] + a[3];
    h0    = ((a[0] << 2) + a[2]) << 1;   // 8a0 + 2a2
    h1    = (a[1] << 2) + a[3];          // 4a1 + a3
    aw[0] = a[3];
    aw[1] = a[0] + (a[1] << 1) + (a[2] << 2) + (a[3] << 3);
    aw[2] = s02 + s13;
    aw[3] = s02 - s13;
    aw[4] = h0 + h1;
    aw[5] = h0 - h1;
    aw[6] = a[0];
  end
endmodule
