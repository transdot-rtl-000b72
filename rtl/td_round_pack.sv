// td_round_pack: rounding and merged output processing.
//
// Per lane, takes the normalized field from td_normalize (top bit of weight texp), cuts
// out the p-bit significand of the result format, the round bit below it and a sticky bit
// (all lower field bits ORed with the alignment sticky), and rounds to nearest, ties to
// even. A carry out of the significand bumps the exponent; a significand without its
// hidden bit is a subnormal (biased exponent 0); an exponent at or above the all-ones code
// becomes an infinity. Lanes flagged flush or zero round as a value below half the
// smallest subnormal, i.e. to a signed zero. The lanes are then packed into the 32-bit
// result (FP32: one lane; FP16: lanes at [15:0] and [31:16]; FP8: lane i at [8i+7:8i]; a
// dot product: one FP32 or FP16 result at the bottom), and special values from the input
// classification replace the lanes they belong to. Scalar FP16/FP8 operations and FP16
// results return zeros in the unused upper bits. Rounding is duplicated per lane, as the
// paper does for format-specific stages; RNE as the only mode and the packing are this
// design's choices. Purely combinational.
module td_round_pack
  import td_pkg::*;
(
  input  part_e        part,
  input  fmt_e         rfmt,
  input  logic [2:0]   nlanes,      // lanes that produce a result (1, 2 or 4)
  input  logic [79:0]  nout,
  input  exp_t         texp   [4],
  input  logic [3:0]   flush,
  input  logic [3:0]   zero,
  input  logic [3:0]   sticky,
  input  logic [3:0]   rsign,
  input  logic [3:0]   spec,
  input  logic [31:0]  spec_val,
  output logic [31:0]  result
);

  always_comb begin
    int          fw, p, eb, bs, lw, emaxb;
    logic [79:0] lf;
    logic [24:0] mant, m2;
    logic        rb, st, up;
    exp_t        t, be;
    logic [31:0] lv, lmask;
    case (part)
      PART_HALF:    fw = 40;
      PART_QUARTER: fw = 20;
      default:      fw = 80;
    endcase
    p     = int'(man_bits(rfmt)) + 1;
    eb    = int'(exp_bits(rfmt));
    bs    = bias(rfmt);
    lw    = 1 + eb + p - 1;
    emaxb = (1 << eb) - 1;
    lmask = (lw == 32) ? 32'hffff_ffff : ((32'd1 << lw) - 32'd1);
    result = '0;
    for (int l = 0; l < 4; l++) begin
      lf = (nout >> (fw * l)) & ((fw == 80) ? {80{1'b1}} : ((80'd1 << fw) - 80'd1));
      if (flush[l] || zero[l]) begin
        mant = '0;
        rb   = 1'b0;
        st   = 1'b0;
      end else begin
        mant = 25'(lf >> (fw - p));
        rb   = lf[fw - p - 1];
        st   = ((lf & ((80'd1 << (fw - p - 1)) - 80'd1)) != '0) | sticky[l];
      end
      up = rb & (st | mant[0]);
      m2 = mant + 25'(up);
      t  = texp[l];
      if (m2[p]) begin
        m2 = m2 >> 1;
        t  = t + exp_t'(1);
      end
      be = m2[p-1] ? t + exp_t'(bs) : exp_t'(0);
      if (be >= exp_t'(emaxb))
        lv = ({31'd0, rsign[l]} << (lw - 1)) | (32'(emaxb) << (p - 1));
      else
        lv = ({31'd0, rsign[l]} << (lw - 1)) | (32'(be) << (p - 1)) |
             (32'(m2) & ((32'd1 << (p - 1)) - 32'd1));
      if (spec[l])
        lv = (spec_val >> (lw * l)) & lmask;
      if (l < int'(nlanes))
        result = result | ((lv & lmask) << (lw * l));
    end
  end

endmodule
