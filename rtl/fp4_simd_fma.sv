// fp4_simd_fma: eight FP4 (E2M1) FMA lanes, R[i] = (+-)A[i]*B[i] (+-) C[i], result in FP4.
//
// Every FP4 value is a multiple of 0.5 no larger than 6, so a lane's exact result
// A*B + C is an integer multiple of 0.25 with magnitude at most 36 + 6 = 42. The products
// come exact from the FP4 DP2 stage (fp4_dp2.prod/psgn, unit 0.25); this block decodes
// C[i] (unit 0.5), applies the operation's sign flips (op[1] negates the product, op[0] the
// addend), adds the two in sign-magnitude form and rounds the exact sum to FP4, nearest even.
// In units of 0.25 the FP4 magnitudes are 0, 2, 4, 6, 8, 12, 16, 24, so rounding is a short
// chain of comparisons against the midpoints 1, 3, 5, 7, 10, 14, 20: a sum exactly on a
// midpoint goes to the neighbour with an even mantissa bit. FP4 has no infinity, so sums
// beyond 6 saturate to +-6. An exact zero sum is +0 unless both product and addend are -0;
// a non-zero sum that rounds to zero keeps its sign. nlanes = 1 (scalar) leaves lanes 1..7
// zero. Element i of every word is bits [4i+3:4i].
// Table I of the paper lists 8-way FP4 SIMD FMA but gives no datapath for it; this block is
// this design's own, built as the light per-lane peripheral logic the paper uses for
// rounding, and fed by the shared FP4 DP2 products. The saturation on overflow is also this
// design's choice. Purely combinational.
module fp4_simd_fma
  import td_pkg::*;
(
  input  logic [7:0]  prod [8],    // |A[i]*B[i]|, unit 0.25
  input  logic [7:0]  psgn,        // sign of A[i]*B[i]
  input  logic [31:0] c,
  input  op_e         op,
  input  logic [3:0]  nlanes,      // 1 or 8
  output logic [31:0] result
);

  // magnitude in units of 0.25 -> FP4 exponent/mantissa code, round to nearest even
  function automatic logic [2:0] rne4(input logic [8:0] n);
    if (n <= 9'd1)       return 3'b000;   // 0    (1 is a tie: 0 is even)
    else if (n <= 9'd2)  return 3'b001;   // 0.5
    else if (n <= 9'd5)  return 3'b010;   // 1    (3 and 5 are ties)
    else if (n <= 9'd6)  return 3'b011;   // 1.5
    else if (n <= 9'd10) return 3'b100;   // 2    (7 and 10 are ties)
    else if (n <= 9'd13) return 3'b101;   // 3
    else if (n <= 9'd20) return 3'b110;   // 4    (14 and 20 are ties)
    else                 return 3'b111;   // 6, saturating
  endfunction

  // FP4 magnitude code -> units of 0.5
  function automatic logic [3:0] mag4(input logic [2:0] em);
    if (em[2:1] == 2'd0) return {3'b000, em[0]};
    else                 return 4'({1'b1, em[0]}) << (em[2:1] - 2'd1);
  endfunction

  always_comb begin
    logic [8:0] pm, cm, sm;
    logic       ps, cs, ss;
    result = '0;
    for (int i = 0; i < 8; i++) begin
      pm = {1'b0, prod[i]};
      ps = psgn[i] ^ op[1];
      cm = {4'd0, mag4(c[4*i +: 3]), 1'b0};
      cs = c[4*i+3] ^ op[0];
      if (ps == cs) begin
        sm = pm + cm;
        ss = ps;
      end else if (pm > cm) begin
        sm = pm - cm;
        ss = ps;
      end else if (pm < cm) begin
        sm = cm - pm;
        ss = cs;
      end else begin
        sm = '0;
        ss = 1'b0;
      end
      if (i < int'(nlanes))
        result[4*i +: 4] = {ss, rne4(sm)};
    end
  end

endmodule
