// mm_multiplier: TransDot multi-mode 24x24 mantissa multiplier with dot-product reduction.
//
// The 24-bit significands are cut into four 6-bit segments, A = {a3,a2,a1,a0} and
// B = {b3,b2,b1,b0}. Eight 12-bit partial products (a0*b0, a0*b1, a1*b0, a1*b1, a2*b2, a3*b2,
// a2*b3, a3*b3) and two 24-bit ones ({a3,a2}*{b1,b0}, {a1,a0}*{b3,b2}) are formed once. Two
// 24-bit adders combine the low and the high four into {a1,a0}*{b1,b0} and {a3,a2}*{b3,b2};
// four input multiplexers select, per mode, what enters a final 50-bit adder:
//   * FP32 (scalar):  all partial products; out = A*B (48 bits).
//   * FP16 SIMD:      cross terms gated; out[23:0] = lane-0 product, out[47:24] = lane 1.
//   * FP8 SIMD:       all cross terms gated; out[12i+11:12i] = a_i*b_i.
//   * FP16 DPA:       the two 24-bit sums are aligned (>>), conditionally negated (neg) and
//                     added: out = sum of two signed terms.
//   * FP8 DPA:        a_i*b_i are aligned, negated and added: out = sum of four signed terms.
//   * FP4 DPA:        the four 9-bit FP4_DP_mag values, negated by their signs, are added.
// In DPA modes out is two's complement. Before its right shift a dot-product term is placed
// with its MSB at bit 46 (a 12-bit a_i*b_i at bits [46:35], a 24-bit half product at [46:23])
// so that four terms plus a sign fit in 50 bits; bits shifted below bit 0 are dropped. FP4
// terms need no alignment and enter at the fixed position [44:36], leaving room below them
// for the addend. Segmenting, the gates (G), the six shifters, six negate
// units, the four multiplexers, the 50-bit adder and the control inputs Mode, Format,
// sh0..3[5:0] and sign[3:0] follow the paper's figure; the term placement, the truncation
// and the use of sign[3:0] for the FP4 terms are this design's choices.
// Timing: when PIPE = 1 (the paper's optional "reconfigurable pipeline stage", enabled here
// by default) the partial products, the 24-bit sums and all control inputs are registered
// when en is high, and out follows one cycle later; with PIPE = 0 it is combinational.
module mm_multiplier
  import td_pkg::*;
#(
  parameter bit PIPE = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [23:0] a,
  input  logic [23:0] b,
  input  fmt_e        fmt,
  input  mode_e       mode,
  input  logic [5:0]  sh      [4],
  input  logic [3:0]  sign,
  input  logic [8:0]  fp4_mag [4],
  output logic [49:0] out
);

  // ---------------- partial products (before the pipeline stage) ----------------
  typedef struct packed {
    logic [23:0] lowsum;    // {a1,a0}*{b1,b0} (cross terms gated in FP8)
    logic [23:0] highsum;   // {a3,a2}*{b3,b2}
    logic [23:0] cross1;    // {a3,a2}*{b1,b0}, gated unless FP32
    logic [23:0] cross2;    // {a1,a0}*{b3,b2}, gated unless FP32
    logic [11:0] p00, p11, p22, p33;
    logic [35:0] fp4;       // four 9-bit FP4 magnitudes
    logic [23:0] shv;       // four 6-bit shift amounts
    logic [3:0]  sign;
    fmt_e        fmt;
    mode_e       mode;
  } mstage_t;

  mstage_t s_in, s_q;

  always_comb begin
    logic [5:0]  as [4];
    logic [5:0]  bs [4];
    logic [11:0] a0b1, a1b0, a3b2, a2b3;
    logic        g_half, g_full;
    for (int i = 0; i < 4; i++) begin
      as[i] = a[6*i +: 6];
      bs[i] = b[6*i +: 6];
    end
    // Gates: 6x6 cross terms are needed for 12-bit (FP16/FP32) products, 12x12 cross terms
    // only for the full 24-bit product.
    g_half = (fmt == FMT_FP32) || (fmt == FMT_FP16);
    g_full = (fmt == FMT_FP32);
    s_in.p00 = as[0] * bs[0];
    s_in.p11 = as[1] * bs[1];
    s_in.p22 = as[2] * bs[2];
    s_in.p33 = as[3] * bs[3];
    a0b1 = g_half ? as[0] * bs[1] : 12'd0;
    a1b0 = g_half ? as[1] * bs[0] : 12'd0;
    a3b2 = g_half ? as[3] * bs[2] : 12'd0;
    a2b3 = g_half ? as[2] * bs[3] : 12'd0;
    s_in.lowsum  = 24'(s_in.p00) + (24'(a0b1) << 6) + (24'(a1b0) << 6) + (24'(s_in.p11) << 12);
    s_in.highsum = 24'(s_in.p22) + (24'(a3b2) << 6) + (24'(a2b3) << 6) + (24'(s_in.p33) << 12);
    s_in.cross1  = g_full ? a[23:12] * b[11:0] : 24'd0;
    s_in.cross2  = g_full ? a[11:0] * b[23:12] : 24'd0;
    for (int j = 0; j < 4; j++) begin
      s_in.fp4[9*j +: 9] = fp4_mag[j];
      s_in.shv[6*j +: 6] = sh[j];
    end
    s_in.sign = sign;
    s_in.fmt  = fmt;
    s_in.mode = mode;
  end

  // ---------------- reconfigurable pipeline stage ----------------
  if (PIPE) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  s_q <= '0;
      else if (en) s_q <= s_in;
    end
  end else begin : g_comb
    assign s_q = s_in;
  end

  // ---------------- dot-product shift, negate, select and 50-bit add ----------------
  function automatic logic [49:0] neg(input logic [46:0] v, input logic s);
    return s ? -{3'b000, v} : {3'b000, v};
  endfunction

  always_comb begin
    logic [46:0] t   [4];   // aligned a_i*b_i (FP8 DPA)
    logic [46:0] u   [2];   // aligned half products (FP16 DPA)
    logic [49:0] m   [4];   // adder inputs
    logic [49:0] f4  [4];
    logic        dpa;
    dpa = (s_q.mode == MODE_DPA32 || s_q.mode == MODE_DPA16) && (s_q.fmt != FMT_FP32);
    t[0] = ({s_q.p00, 35'd0}) >> s_q.shv[5:0];
    t[1] = ({s_q.p11, 35'd0}) >> s_q.shv[11:6];
    t[2] = ({s_q.p22, 35'd0}) >> s_q.shv[17:12];
    t[3] = ({s_q.p33, 35'd0}) >> s_q.shv[23:18];
    u[0] = ({s_q.lowsum, 23'd0})  >> s_q.shv[5:0];
    u[1] = ({s_q.highsum, 23'd0}) >> s_q.shv[11:6];
    for (int j = 0; j < 4; j++)
      f4[j] = neg({2'b00, s_q.fp4[9*j +: 9], 36'd0}, s_q.sign[j]);
    if (dpa && s_q.fmt == FMT_FP4) begin
      for (int j = 0; j < 4; j++) m[j] = f4[j];
    end else if (dpa && s_q.fmt == FMT_FP8) begin
      for (int j = 0; j < 4; j++) m[j] = neg(t[j], s_q.sign[j]);
    end else if (dpa) begin  // FP16
      m[0] = neg(u[0], s_q.sign[0]);
      m[1] = '0;
      m[2] = '0;
      m[3] = neg(u[1], s_q.sign[1]);
    end else begin
      m[0] = 50'(s_q.lowsum);
      m[1] = 50'(s_q.cross1) << 12;
      m[2] = 50'(s_q.cross2) << 12;
      m[3] = 50'(s_q.highsum) << 24;
    end
    out = m[0] + m[1] + m[2] + m[3];
  end

endmodule
