// fp4_dp2: FP4 two-term dot-product stage.
//
// FP4 (E2M1) has so little range that every FP4 value is an integer multiple of 0.5 between
// -6 and 6, and every product of two of them a multiple of 0.25. This stage therefore skips
// the exponent datapath for FP4: it decodes the eight FP4 elements of A and of B into 4-bit
// fixed-point magnitudes (unit 0.5), multiplies pairs exactly (8-bit, unit 0.25) and adds the
// two products of each pair of pairs, giving four signed two-term dot products
//     dp[j] = A[2j]*B[2j] + A[2j+1]*B[2j+1]
// in sign-magnitude form: a 9-bit magnitude (unit 2^-2, at most 288) and a sign. These are
// the FP4_DP_mag[3:0][8:0] and sign inputs of the multi-mode multiplier, which adds them.
// Element i of an operand is bits [4i+3:4i]. The paper gives the stage's function (FP4 DP2,
// sign-magnitude, four 9-bit results from 8 pairs); the fixed-point decoding, the pairing
// of elements and the OCP E2M1 interpretation (bias 1, no Inf/NaN) are this design's own.
// A zero sum has sign 0. The eight single products (prod, psgn; element order) are also
// given out for the FP4 SIMD FMA lanes. Purely combinational.
module fp4_dp2 (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [8:0]  mag  [4],
  output logic [3:0]  sign,
  output logic [7:0]  prod [8],    // |A[i]*B[i]|, unit 0.25
  output logic [7:0]  psgn         // sign of A[i]*B[i]
);

  // FP4 magnitude in units of 0.5: subnormal 0.m, normal 1.m * 2^(e-1).
  function automatic logic [3:0] fp4_mag(input logic [2:0] em);
    logic [1:0] e;
    e = em[2:1];
    if (e == 2'd0) return {3'b000, em[0]};
    else           return 4'({1'b1, em[0]}) << (e - 2'd1);
  endfunction

  always_comb begin
    logic [7:0] p0, p1;
    logic       s0, s1;
    for (int j = 0; j < 4; j++) begin
      p0 = fp4_mag(a[8*j+2 -: 3]) * fp4_mag(b[8*j+2 -: 3]);
      p1 = fp4_mag(a[8*j+6 -: 3]) * fp4_mag(b[8*j+6 -: 3]);
      s0 = a[8*j+3] ^ b[8*j+3];
      s1 = a[8*j+7] ^ b[8*j+7];
      prod[2*j]     = p0;
      prod[2*j+1]   = p1;
      psgn[2*j]     = s0;
      psgn[2*j+1]   = s1;
      if (s0 == s1) begin
        mag[j]  = {1'b0, p0} + {1'b0, p1};
        sign[j] = s0 & (mag[j] != 9'd0);
      end else if (p0 >= p1) begin
        mag[j]  = {1'b0, p0 - p1};
        sign[j] = s0 & (p0 != p1);
      end else begin
        mag[j]  = {1'b0, p1 - p0};
        sign[j] = s1;
      end
    end
  end

endmodule
