// td_pkg: types and constants shared by the TransDot trans-precision FMA/DPA unit.
//
// Formats follow the encodings of the paper's mode table: FP32 (E8M23), FP16 (E5M10),
// FP8 (E4M3) and FP4 (E2M1). FP32, FP16 and FP8 are treated IEEE-754 style (an all-ones
// exponent encodes Inf/NaN, exponent 0 encodes zero/subnormals); FP4 follows the OCP MX
// E2M1 convention (bias 1, no Inf/NaN). That split, the 2-bit encodings of format, mode and
// operation, and round-to-nearest-even as the only rounding mode are choices of this design.
// Exponents inside the datapath are unbiased two's-complement values of width EXP_W and
// always give the weight of a least significant bit ("LSB exponent").
package td_pkg;

  // Format[1:0] as printed on the multiplier figure; encoding is this design's choice.
  typedef enum logic [1:0] {
    FMT_FP32 = 2'd0,
    FMT_FP16 = 2'd1,
    FMT_FP8  = 2'd2,
    FMT_FP4  = 2'd3
  } fmt_e;

  // Mode[1:0]: scalar FMA, SIMD FMA, dot-product accumulation into FP32 or FP16.
  typedef enum logic [1:0] {
    MODE_SCALAR = 2'd0,
    MODE_SIMD   = 2'd1,
    MODE_DPA32  = 2'd2,
    MODE_DPA16  = 2'd3
  } mode_e;

  // FMA flavours: negate the product and/or the addend.
  typedef enum logic [1:0] {
    OP_FMADD  = 2'd0,   //  (A*B) + C
    OP_FMSUB  = 2'd1,   //  (A*B) - C
    OP_FNMSUB = 2'd2,   // -(A*B) + C
    OP_FNMADD = 2'd3    // -(A*B) - C
  } op_e;

  // Partition modes of the reconfigurable shifters and the segmented adder
  // (the shifter figure gives 2'b10 for half and 2'b11 for quarter mode).
  typedef enum logic [1:0] {
    PART_FULL    = 2'b00,
    PART_HALF    = 2'b10,
    PART_QUARTER = 2'b11
  } part_e;

  localparam int EXP_W = 13;
  typedef logic signed [EXP_W-1:0] exp_t;

  // Operand classification.
  typedef struct packed {
    logic zero;
    logic inf;
    logic nan;
    logic snan;
  } fclass_t;

  // Per-format constants.
  function automatic int unsigned man_bits(input fmt_e f);
    case (f)
      FMT_FP32: return 23;
      FMT_FP16: return 10;
      FMT_FP8:  return 3;
      default:  return 1;
    endcase
  endfunction

  function automatic int unsigned exp_bits(input fmt_e f);
    case (f)
      FMT_FP32: return 8;
      FMT_FP16: return 5;
      FMT_FP8:  return 4;
      default:  return 2;
    endcase
  endfunction

  function automatic int bias(input fmt_e f);
    return (1 << (exp_bits(f) - 1)) - 1;
  endfunction

  // Unbiased exponent of the smallest normal number.
  function automatic int emin(input fmt_e f);
    return 1 - bias(f);
  endfunction

  // Partition mode used by the shared shifters and adder for a format/mode pair.
  function automatic part_e part_of(input fmt_e f, input mode_e m);
    if (m == MODE_DPA32 || m == MODE_DPA16 || f == FMT_FP32 || f == FMT_FP4) return PART_FULL;
    else if (f == FMT_FP16) return PART_HALF;
    else return PART_QUARTER;
  endfunction

  // Format in which the result of a lane is rounded.
  function automatic fmt_e res_fmt(input fmt_e f, input mode_e m);
    if (m == MODE_DPA32) return FMT_FP32;
    else if (m == MODE_DPA16) return FMT_FP16;
    else return f;
  endfunction

  // Canonical quiet NaN of a format, right-aligned.
  function automatic logic [31:0] qnan(input fmt_e f);
    case (f)
      FMT_FP32: return 32'h7fc0_0000;
      FMT_FP16: return 32'h0000_7e00;
      FMT_FP8:  return 32'h0000_007c;
      default:  return 32'h0000_0007;
    endcase
  endfunction

endpackage
