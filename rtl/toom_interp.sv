// toom_interp: interpolation data path of the Toom-Cook-4 multiplier.
// Takes the seven point products w1..w7 (w[0..6], same order as toom_eval)
// of one coefficient index and returns the seven coefficients z^0..z^6 of
// the product, z[k], modulo 2^16.  Divisions by 3, 9 and 15 are replaced by
// multiplication with their inverses modulo 2^16 (43691, 36409, 61167),
// divisions by 2, 4 and 8 by right shifts; the shifts lose the top bits, so
// the results are exact modulo 2^13, which is all Saber needs.  The
// operation sequence is that of the Saber reference Toom-Cook-4.
// Five register stages: a result leaves `z` five cycles after its input
// was presented with `in_valid`; one new index can enter every cycle, so 64
// indices pass in 69 cycles and, with one cycle of cache read, the
// interpolation of a full product takes 70 cycles.
module toom_interp (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [6:0][15:0] w,
  output logic             out_valid,
  output logic [6:0][15:0] z
);
  localparam logic [15:0] INV3  = 16'd43691;
  localparam logic [15:0] INV9  = 16'd36409;
  localparam logic [15:0] INV15 = 16'd61167;

  typedef logic [6:0][15:0] vec_t;
  vec_t s1, s2, s3, s4, s5;
  logic [4:0] v;

  // stage functions; r[i] keeps the reference's register names r0..r6
  function automatic vec_t f1(vec_t r);
    vec_t o = r;
    o[1] = r[1] + r[4];
    o[5] = r[5] - r[4];
    o[3] = 16'((r[3] - r[2]) >> 1);
    o[4] = r[4] - r[0] - (r[6] << 6);
    return o;
  endfunction
  function automatic vec_t f2(vec_t r);
    vec_t o = r;
    o[4] = (r[4] << 1) + r[5];
    o[2] = r[2] + r[3];
    return o;
  endfunction
  function automatic vec_t f3(vec_t r);
    vec_t o = r;
    o[1] = r[1] - (r[2] << 6) - r[2];
    o[2] = r[2] - r[6] - r[0];
    return o;
  endfunction
  function automatic vec_t f4(vec_t r);
    vec_t o = r;
    logic [15:0] t;
    o[1] = r[1] + 16'(16'd45 * r[2]);
    t    = 16'((r[4] - (r[2] << 3)) * INV3);
    o[4] = t >> 3;
    return o;
  endfunction
  function automatic vec_t f5(vec_t r);
    vec_t o = r;
    logic [15:0] t;
    o[5] = r[5] + r[1];
    t    = 16'((r[1] + (r[3] << 4)) * INV9);
    o[1] = t >> 1;
    return o;
  endfunction
  function automatic vec_t f6(vec_t r);
    vec_t o = r;
    logic [15:0] t;
    o[3] = -(r[3] + r[1]);
    t    = 16'((16'(16'd30 * r[1]) - r[5]) * INV15);
    o[5] = t >> 2;
    o[2] = r[2] - r[4];
    o[1] = r[1] - o[5];
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      s1 <= '0; s2 <= '0; s3 <= '0; s4 <= '0; s5 <= '0;
    end else begin
      v  <= {v[3:0], in_valid};
      s1 <= f1(w);
      s2 <= f2(s1);
      s3 <= f3(s2);
      s4 <= f4(s3);
      s5 <= f5(s4);
    end
  end

  vec_t r6;
  always_comb begin
    r6 = f6(s5);
    out_valid = v[4];
    // z^0 = r6, z^1 = r5, ..., z^6 = r0
    for (int k = 0; k < 7; k++) z[k] = r6[6-k];
  end
endmodule
