// keccak_round: one round of the Keccak-f[1600] permutation (FIPS 202):
// theta, rho, pi, chi and iota, purely combinational.  The state is 25
// lanes of 64 bits, lane x + 5y at st[x + 5*y]; `round` (0..23) selects the
// iota round constant.
module keccak_round (
  input  logic [24:0][63:0] st_in,
  input  logic [4:0]        round,
  output logic [24:0][63:0] st_out
);
  // rotation offsets r[x][y] of the rho step
  localparam int ROT [5][5] = '{
    '{ 0, 36,  3, 41, 18},
    '{ 1, 44, 10, 45,  2},
    '{62,  6, 43, 15, 61},
    '{28, 55, 25, 21, 56},
    '{27, 20, 39,  8, 14}
  };

  function automatic logic [63:0] rc(input logic [4:0] r);
    unique case (r)
      5'd0:  return 64'h0000000000000001;
      5'd1:  return 64'h0000000000008082;
      5'd2:  return 64'h800000000000808A;
      5'd3:  return 64'h8000000080008000;
      5'd4:  return 64'h000000000000808B;
      5'd5:  return 64'h0000000080000001;
      5'd6:  return 64'h8000000080008081;
      5'd7:  return 64'h8000000000008009;
      5'd8:  return 64'h000000000000008A;
      5'd9:  return 64'h0000000000000088;
      5'd10: return 64'h0000000080008009;
      5'd11: return 64'h000000008000000A;
      5'd12: return 64'h000000008000808B;
      5'd13: return 64'h800000000000008B;
      5'd14: return 64'h8000000000008089;
      5'd15: return 64'h8000000000008003;
      5'd16: return 64'h8000000000008002;
      5'd17: return 64'h8000000000000080;
      5'd18: return 64'h000000000000800A;
      5'd19: return 64'h800000008000000A;
      5'd20: return 64'h8000000080008081;
      5'd21: return 64'h8000000000008080;
      5'd22: return 64'h0000000080000001;
      5'd23: return 64'h8000000080008008;
      default: return 64'h0;
    endcase
  endfunction

  function automatic logic [63:0] rotl(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  logic [4:0][63:0]  c, d;
  logic [24:0][63:0] a, b;

  always_comb begin
    for (int x = 0; x < 5; x++)
      c[x] = st_in[x] ^ st_in[x+5] ^ st_in[x+10] ^ st_in[x+15] ^ st_in[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++)
      a[i] = st_in[i] ^ d[i%5];
    // rho and pi: B[y, 2x+3y] = rot(A[x, y], r[x, y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], ROT[x][y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        st_out[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    st_out[0] = st_out[0] ^ rc(round);
  end
endmodule
