// td_exp_dp: merged exponent datapath.
//
// Works only on LSB exponents (the weight of a significand's least significant bit), so the
// same arithmetic serves every format. Per lane it computes
//   * the weight of bit 0 of the product field of the adder: ea + eb - 2 for an FMA (the
//     product enters the adder shifted left by two guard bits); for a dot product the weight
//     of bit 0 of the multiplier's 50-bit sum,
//   * the addend alignment shift s = PA + Ep0 - Ec0, clamped to [0, WP], where PA is the
//     addend's LSB position in the adder partition when unshifted and WP the partition width
//     (76/52 full, 38/27 half, 19/15 quarter). s = 0 is used when the product is zero,
//     s = WP (addend only in the sticky bits) when the addend is zero,
//   * the weight of bit 0 of the adder window: Ep0, or Ec0 - PA when the addend is so large
//     that it was not shifted (and w0c = Ec0 - PA, used if the product turns out zero later).
// For the dot products it finds the largest product exponent among the non-zero FP16/FP8
// products and gives each product's distance to it as the 6-bit shift sh_i (saturated at
// 63) for the multiplier's alignment shifters; the dot-product sum is then weighted
// relative to that maximum. FP4 dot products are exact fixed-point sums whose bit 0 is worth
// 2^-38 (the multiplier places the 2^-2 unit at bit 36). The 3p+4 adder and 4p+4 alignment geometry follow the paper (FPnew's scheme); the
// per-mode partition constants and the max-exponent alignment are this design's own.
// Purely combinational.
module td_exp_dp
  import td_pkg::*;
(
  input  fmt_e        fmt,
  input  mode_e       mode,       // normalised mode (td_unpack.mode_eff)
  input  exp_t        ea_lsb [4],
  input  exp_t        eb_lsb [4],
  input  logic [3:0]  pzero,
  input  exp_t        ec_lsb [4],
  input  logic [3:0]  czero,
  output logic [5:0]  sh     [4], // multiplier dot-product alignment
  output logic [6:0]  s      [4], // addend alignment shift per lane
  output exp_t        w0     [4], // weight of adder-window bit 0 per lane
  output exp_t        w0c    [4], // same, if the product is zero
  output logic [3:0]  prod_zero   // product (or whole dot product) known to be zero
);

  always_comb begin
    exp_t pe [4];
    exp_t pmax, ep0, d, sraw;
    int   pa, wp, nt;
    logic dpa, any;
    dpa = (mode == MODE_DPA32) || (mode == MODE_DPA16);
    case (part_of(fmt, mode))
      PART_HALF:    begin pa = 27; wp = 38; end
      PART_QUARTER: begin pa = 15; wp = 19; end
      default:      begin pa = 52; wp = 76; end
    endcase
    nt = (fmt == FMT_FP16) ? 2 : 4;

    // dot-product alignment
    pmax = exp_t'(-(1 << (EXP_W - 1)));
    any  = 1'b0;
    for (int i = 0; i < 4; i++) begin
      pe[i] = ea_lsb[i] + eb_lsb[i];
      if (i < nt && !pzero[i] && pe[i] > pmax) pmax = pe[i];
      if (i < nt && !pzero[i]) any = 1'b1;
    end
    for (int i = 0; i < 4; i++) begin
      d = pmax - pe[i];
      sh[i] = (!dpa || fmt == FMT_FP4 || pzero[i]) ? 6'd0 :
              (d > exp_t'(63)) ? 6'd63 : 6'(d);
    end

    for (int i = 0; i < 4; i++) begin
      if (dpa) begin
        case (fmt)
          FMT_FP8:  ep0 = pmax - exp_t'(35);
          FMT_FP16: ep0 = pmax - exp_t'(23);
          default:  ep0 = exp_t'(-38);   // FP4: unit 2^-2 at bit 36
        endcase
        prod_zero[i] = (i == 0) ? ((fmt != FMT_FP4) && !any) : 1'b1;
      end else begin
        ep0 = ea_lsb[i] + eb_lsb[i] - exp_t'(2);
        prod_zero[i] = pzero[i];
      end
      sraw   = exp_t'(pa) + ep0 - ec_lsb[i];
      w0c[i] = ec_lsb[i] - exp_t'(pa);
      if (prod_zero[i]) begin
        s[i]  = 7'd0;
        w0[i] = w0c[i];
      end else if (czero[i]) begin
        s[i]  = 7'(wp);
        w0[i] = ep0;
      end else if (sraw < 0) begin
        s[i]  = 7'd0;
        w0[i] = w0c[i];
      end else begin
        s[i]  = (sraw > exp_t'(wp)) ? 7'(wp) : 7'(sraw);
        w0[i] = ep0;
      end
    end
  end

endmodule
