// td_unpack: merged input processing, input classification and special-case handling.
//
// Splits the three 32-bit operand words into up to four lanes (FP32: one, FP16: two, FP8:
// four; FP4 elements are handled by fp4_dp2), decodes every element into sign, significand
// with hidden bit and LSB exponent, classifies it (zero, Inf, NaN) and places the A and B
// significands in the segment layout of the multi-mode multiplier:
//   FP32: 24-bit significand in [23:0]; FP16 lane i: 11 bits at [12i+10:12i];
//   FP8 lane i: 4 bits at [6i+3:6i].
// The addend C is decoded per lane in the result format; when a dot product accumulates
// into FP16 its 11-bit significand is moved to the top of the 24-bit addend slot (LSB
// exponent lowered by 13) so that the full-width datapath can be used unchanged.
// The operation (FMADD/FMSUB/FNMSUB/FNMADD) is applied here as sign flips of the product
// and of the addend. Special cases (NaN operands, Inf*0, Inf-Inf, Inf operands) are resolved
// per lane into a final value that the output stage substitutes for the computed one.
// Mode normalisation: FP32 has no dot-product form beyond one term, so FP32 runs in scalar
// mode whatever mode is requested; FP4 elements reach this datapath only as a dot product,
// so FP4 with a scalar or SIMD mode runs here as a dot product into FP32 (the FP4 FMA lanes
// themselves are computed beside this datapath, in fp4_simd_fma, and this result is unused).
// The block names come from the paper's microarchitecture figure; everything inside is this
// design's own (the paper gives no detail). Purely combinational.
module td_unpack
  import td_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  input  fmt_e        fmt,
  input  mode_e       mode,
  input  op_e         op,
  output mode_e       mode_eff,
  output logic [23:0] ma,          // multiplier operands, segment layout
  output logic [23:0] mb,
  output exp_t        ea_lsb [4],  // LSB exponent of A/B element i
  output exp_t        eb_lsb [4],
  output logic [3:0]  pzero,       // product of element i is zero
  output logic [3:0]  psign,       // product sign of element i (operation applied)
  output logic [23:0] csig   [4],  // addend significand of lane i (right-aligned)
  output exp_t        ec_lsb [4],
  output logic [3:0]  czero,
  output logic [3:0]  csign,       // addend sign (operation applied)
  output logic [3:0]  spec,        // lane i result is a special value
  output logic [31:0] spec_val     // special values, packed like the result
);

  typedef struct packed {
    logic        s;
    logic [23:0] sig;
    exp_t        lsb;
    fclass_t     cl;
  } dec_t;

  function automatic dec_t decode(input logic [31:0] x, input fmt_e f);
    dec_t d;
    int unsigned mbits, ebits, e, m, emax;
    mbits = man_bits(f);
    ebits = exp_bits(f);
    e     = (x >> mbits) & ((1 << ebits) - 1);
    m     = x & ((1 << mbits) - 1);
    emax  = (1 << ebits) - 1;
    d.s   = x[mbits + ebits];
    d.sig = 24'((e != 0) ? ((1 << mbits) | m) : m);
    d.lsb = exp_t'(((e == 0) ? 1 : int'(e)) - bias(f) - int'(mbits));
    d.cl.zero = (e == 0) && (m == 0);
    if (f == FMT_FP4) begin
      d.cl.inf  = 1'b0;
      d.cl.nan  = 1'b0;
      d.cl.snan = 1'b0;
    end else begin
      d.cl.inf  = (e == emax) && (m == 0);
      d.cl.nan  = (e == emax) && (m != 0);
      d.cl.snan = d.cl.nan && !x[mbits - 1];
    end
    return d;
  endfunction

  function automatic logic [31:0] inf_of(input fmt_e f, input logic s);
    case (f)
      FMT_FP32: return {s, 31'h7f80_0000};
      FMT_FP16: return {16'd0, s, 15'h7c00};
      default:  return {24'd0, s, 7'h78};
    endcase
  endfunction

  always_comb begin
    dec_t   da [4];
    dec_t   db [4];
    dec_t   dc [4];
    fmt_e   rf;
    logic   np, nc;
    logic   any_nan, inv, pinf, ninf;
    logic [31:0] lane_x, lane_y, lane_z, sv;
    int     nl, lw;

    // mode normalisation
    if (fmt == FMT_FP32)                                  mode_eff = MODE_SCALAR;
    else if (fmt == FMT_FP4 && (mode == MODE_SCALAR || mode == MODE_SIMD)) mode_eff = MODE_DPA32;
    else                                                  mode_eff = mode;
    rf = res_fmt(fmt, mode_eff);
    np = op[1];
    nc = op[0];

    case (fmt)
      FMT_FP32: begin nl = 1; lw = 32; end
      FMT_FP16: begin nl = 2; lw = 16; end
      FMT_FP8:  begin nl = 4; lw = 8;  end
      default:  begin nl = 0; lw = 4;  end
    endcase

    ma = '0;
    mb = '0;
    for (int i = 0; i < 4; i++) begin
      lane_x = (i < nl) ? (a >> (lw * i)) : 32'd0;
      lane_y = (i < nl) ? (b >> (lw * i)) : 32'd0;
      da[i] = decode(lane_x, fmt);
      db[i] = decode(lane_y, fmt);
      ea_lsb[i] = da[i].lsb;
      eb_lsb[i] = db[i].lsb;
      pzero[i]  = (i >= nl) || da[i].cl.zero || db[i].cl.zero;
      psign[i]  = da[i].s ^ db[i].s ^ np;
    end
    case (fmt)
      FMT_FP32: begin
        ma = da[0].sig;
        mb = db[0].sig;
      end
      FMT_FP16: begin
        for (int i = 0; i < 2; i++) begin
          ma[12*i +: 12] = da[i].sig[11:0];
          mb[12*i +: 12] = db[i].sig[11:0];
        end
      end
      FMT_FP8: begin
        for (int i = 0; i < 4; i++) begin
          ma[6*i +: 6] = da[i].sig[5:0];
          mb[6*i +: 6] = db[i].sig[5:0];
        end
      end
      default: ;
    endcase

    // addend lanes, decoded in the result format
    for (int i = 0; i < 4; i++) begin
      if (mode_eff == MODE_DPA32 || mode_eff == MODE_DPA16 || fmt == FMT_FP32)
        lane_z = (i == 0) ? c : 32'd0;
      else
        lane_z = (i < nl) ? (c >> (lw * i)) : 32'd0;
      dc[i] = decode(lane_z, rf);
      csig[i]   = dc[i].sig;
      ec_lsb[i] = dc[i].lsb;
      if (mode_eff == MODE_DPA16 && i == 0) begin
        csig[i]   = dc[i].sig << 13;
        ec_lsb[i] = dc[i].lsb - exp_t'(13);
      end
      czero[i] = dc[i].cl.zero;
      csign[i] = dc[i].s ^ nc;
    end

    // special cases
    spec     = '0;
    spec_val = '0;
    if (mode_eff == MODE_DPA32 || mode_eff == MODE_DPA16) begin
      any_nan = dc[0].cl.nan;
      inv     = 1'b0;
      pinf    = dc[0].cl.inf && !csign[0];
      ninf    = dc[0].cl.inf &&  csign[0];
      for (int i = 0; i < 4; i++) if (i < nl) begin
        any_nan = any_nan | da[i].cl.nan | db[i].cl.nan;
        inv     = inv | (da[i].cl.inf & db[i].cl.zero) | (da[i].cl.zero & db[i].cl.inf);
        pinf    = pinf | ((da[i].cl.inf | db[i].cl.inf) & !psign[i]);
        ninf    = ninf | ((da[i].cl.inf | db[i].cl.inf) &  psign[i]);
      end
      if (any_nan || inv || (pinf && ninf)) begin
        spec[0]  = 1'b1;
        spec_val = qnan(rf);
      end else if (pinf || ninf) begin
        spec[0]  = 1'b1;
        spec_val = inf_of(rf, ninf);
      end
    end else begin
      for (int i = 0; i < 4; i++) if (i < nl) begin
        any_nan = da[i].cl.nan | db[i].cl.nan | dc[i].cl.nan;
        inv     = (da[i].cl.inf & db[i].cl.zero) | (da[i].cl.zero & db[i].cl.inf);
        pinf    = da[i].cl.inf | db[i].cl.inf;
        sv      = '0;
        if (any_nan || inv || (pinf && dc[i].cl.inf && (psign[i] != csign[i]))) begin
          spec[i] = 1'b1;
          sv      = qnan(rf);
        end else if (pinf) begin
          spec[i] = 1'b1;
          sv      = inf_of(rf, psign[i]);
        end else if (dc[i].cl.inf) begin
          spec[i] = 1'b1;
          sv      = inf_of(rf, csign[i]);
        end
        spec_val = spec_val | (sv << (lw * i));
      end
    end
  end

endmodule
