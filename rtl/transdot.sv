// transdot: reconfigurable FP32 FMA unit with multi-format SIMD FMA and trans-precision
// dot-product accumulation (DPA).
//
// One operation per cycle on three 32-bit operand words A, B, C:
//   fmt=FP32                 result = A*B + C                        (FP32, scalar)
//   fmt=FP16/FP8, SCALAR     lane 0 only: result = A0*B0 + C0        (FP16 / FP8)
//   fmt=FP16/FP8, SIMD       2 FP16 or 4 FP8 lanes: Ri = Ai*Bi + Ci
//   fmt=FP4, SCALAR / SIMD   lane 0 / 8 FP4 lanes: Ri = Ai*Bi + Ci (FP4)
//   fmt=FP16/FP8/FP4, DPA32  result = sum_i Ai*Bi + C, C and result FP32
//                            (2 FP16 terms, 4 FP8 terms or 8 FP4 terms)
//   fmt=FP16/FP8/FP4, DPA16  the same with C and the result in FP16 (bits [15:0])
// op selects FMADD, FMSUB, FNMSUB or FNMADD (sign flips of product and addend).
// All modes share one datapath: the input stage unpacks and classifies the operands, the
// exponent datapath computes alignments, the multi-mode 24x24 multiplier forms either the
// full product, 2 or 4 SIMD products or the aligned signed sum of the dot-product terms
// (FP4 terms come exact from the FP4 two-term dot-product stage), and the alignment
// shifter, adder, normalization shifter are split into 1, 2 or 4 lanes. Rounding is
// round-to-nearest-even, done once per lane after the addition of C; in dot products the
// products are aligned to the largest one inside a 50-bit window and bits below it are
// dropped before that addition. FP4 FMA lanes take their exact products from the FP4 DP2
// stage and add and round them in small per-lane logic (fp4_simd_fma); that result travels
// down the pipeline beside the main datapath, which runs such an operation as an unused
// dot product, and is selected at the output.
// Timing: four register stages (inputs, the multiplier's internal stage, after the adder,
// outputs): out_valid/result follow in_valid/operands by exactly 4 cycles in every mode,
// with a new operation accepted every cycle (latency 4, throughput 1, as in the paper's
// performance table). There is no back-pressure. Registers reset asynchronously (rst_n).
// The block structure and the pipeline register positions follow the paper's
// microarchitecture figure; interfaces, encodings and the insides of the stages the paper
// only names are this design's own.
module transdot
  import td_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  input  fmt_e        fmt,
  input  mode_e       mode,
  input  op_e         op,
  output logic        out_valid,
  output logic [31:0] result
);

  // ---------------- stage 1: input pipeline registers ----------------
  typedef struct packed {
    logic        valid;
    logic [31:0] a, b, c;
    fmt_e        fmt;
    mode_e       mode;
    op_e         op;
  } s1_t;

  s1_t r1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r1 <= '0;
    else begin
      r1.valid <= in_valid;
      if (in_valid) begin
        r1.a    <= a;
        r1.b    <= b;
        r1.c    <= c;
        r1.fmt  <= fmt;
        r1.mode <= mode;
        r1.op   <= op;
      end
    end
  end

  // ---------------- input processing, classification, exponents, FP4 DP2 ----------------
  mode_e       mode_eff;
  logic [23:0] ma, mb;
  exp_t        ea_lsb [4], eb_lsb [4], ec_lsb [4];
  logic [3:0]  pzero, psign, czero, csign, spec;
  logic [23:0] csig [4];
  logic [31:0] spec_val;
  logic [5:0]  msh [4];
  logic [6:0]  ssh [4];
  exp_t        w0 [4], w0c [4];
  logic [3:0]  prod_zero;
  logic [8:0]  f4mag [4];
  logic [3:0]  f4sign, msign;
  logic [7:0]  f4prod [8];
  logic [7:0]  f4psgn;
  logic        f4fma;
  logic [31:0] f4res;
  logic [49:0] mout;

  td_unpack u_unpack (
    .a (r1.a), .b (r1.b), .c (r1.c), .fmt (r1.fmt), .mode (r1.mode), .op (r1.op),
    .mode_eff, .ma, .mb, .ea_lsb, .eb_lsb, .pzero, .psign, .csig, .ec_lsb, .czero, .csign,
    .spec, .spec_val
  );

  td_exp_dp u_exp (
    .fmt (r1.fmt), .mode (mode_eff), .ea_lsb, .eb_lsb, .pzero, .ec_lsb, .czero,
    .sh (msh), .s (ssh), .w0, .w0c, .prod_zero
  );

  fp4_dp2 u_fp4 (.a (r1.a), .b (r1.b), .mag (f4mag), .sign (f4sign), .prod (f4prod),
                 .psgn (f4psgn));

  // FP4 scalar/SIMD FMA lanes
  assign f4fma = (r1.fmt == FMT_FP4) && (r1.mode == MODE_SCALAR || r1.mode == MODE_SIMD);

  fp4_simd_fma u_f4fma (
    .prod (f4prod), .psgn (f4psgn), .c (r1.c), .op (r1.op),
    .nlanes ((r1.mode == MODE_SCALAR) ? 4'd1 : 4'd8), .result (f4res)
  );

  // dot-product term signs: product signs, or the FP4 pair-sum signs (operation applied)
  assign msign = (r1.fmt == FMT_FP4) ? (f4sign ^ {4{r1.op[1]}}) : psign;

  // ---------------- stage 2: multiplier (internal pipeline stage) ----------------
  mm_multiplier #(.PIPE(1'b1)) u_mul (
    .clk, .rst_n, .en (r1.valid), .a (ma), .b (mb), .fmt (r1.fmt), .mode (mode_eff),
    .sh (msh), .sign (msign), .fp4_mag (f4mag), .out (mout)
  );

  typedef struct packed {
    logic        valid;
    fmt_e        fmt;
    mode_e       mode;
    logic [3:0]  psign;
    logic [3:0]  csign;
    logic [95:0] csig;
    logic [27:0] s;
    logic [51:0] w0;
    logic [51:0] w0c;
    logic [3:0]  spec;
    logic [31:0] spec_val;
    logic        f4fma;
    logic [31:0] f4res;
  } s2_t;

  s2_t r2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r2 <= '0;
    else begin
      r2.valid <= r1.valid;
      if (r1.valid) begin
        r2.fmt      <= r1.fmt;
        r2.mode     <= mode_eff;
        r2.psign    <= psign;
        r2.csign    <= csign;
        r2.spec     <= spec;
        r2.spec_val <= spec_val;
        r2.f4fma    <= f4fma;
        r2.f4res    <= f4res;
        for (int i = 0; i < 4; i++) begin
          r2.csig[24*i +: 24]         <= csig[i];
          r2.s[7*i +: 7]              <= ssh[i];
          r2.w0[EXP_W*i +: EXP_W]     <= w0[i];
          r2.w0c[EXP_W*i +: EXP_W]    <= w0c[i];
        end
      end
    end
  end

  // ---------------- merged alignment shifter and adder ----------------
  logic [23:0] csig2 [4];
  logic [6:0]  s2 [4];
  exp_t        w02 [4], w0c2 [4], wf0 [4];
  logic [79:0] nfield;
  logic [3:0]  rsign, sticky;

  always_comb
    for (int i = 0; i < 4; i++) begin
      csig2[i] = r2.csig[24*i +: 24];
      s2[i]    = r2.s[7*i +: 7];
      w02[i]   = r2.w0[EXP_W*i +: EXP_W];
      w0c2[i]  = r2.w0c[EXP_W*i +: EXP_W];
    end

  td_align_add u_align_add (
    .fmt (r2.fmt), .mode (r2.mode), .mout, .psign (r2.psign), .csig (csig2),
    .csign (r2.csign), .s (s2), .w0 (w02), .w0c (w0c2), .nfield, .rsign, .sticky, .wf0
  );

  // ---------------- stage 3: pipeline registers after the adder ----------------
  typedef struct packed {
    logic        valid;
    fmt_e        fmt;
    mode_e       mode;
    logic [79:0] nfield;
    logic [3:0]  rsign;
    logic [3:0]  sticky;
    logic [51:0] wf0;
    logic [3:0]  spec;
    logic [31:0] spec_val;
    logic        f4fma;
    logic [31:0] f4res;
  } s3_t;

  s3_t r3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r3 <= '0;
    else begin
      r3.valid <= r2.valid;
      if (r2.valid) begin
        r3.fmt      <= r2.fmt;
        r3.mode     <= r2.mode;
        r3.nfield   <= nfield;
        r3.rsign    <= rsign;
        r3.sticky   <= sticky;
        r3.spec     <= r2.spec;
        r3.spec_val <= r2.spec_val;
        r3.f4fma    <= r2.f4fma;
        r3.f4res    <= r2.f4res;
        for (int i = 0; i < 4; i++) r3.wf0[EXP_W*i +: EXP_W] <= wf0[i];
      end
    end
  end

  // ---------------- normalization, rounding, output processing ----------------
  part_e       part3;
  fmt_e        rfmt3;
  logic [2:0]  nl3;
  exp_t        wf03 [4], texp [4];
  logic [79:0] nout;
  logic [3:0]  flush, nzero;
  logic [31:0] res_d;

  assign part3 = part_of(r3.fmt, r3.mode);
  assign rfmt3 = res_fmt(r3.fmt, r3.mode);
  assign nl3   = (r3.mode != MODE_SIMD) ? 3'd1 : (r3.fmt == FMT_FP16) ? 3'd2 : 3'd4;

  always_comb
    for (int i = 0; i < 4; i++) wf03[i] = r3.wf0[EXP_W*i +: EXP_W];

  td_normalize u_norm (
    .part (part3), .rfmt (rfmt3), .nfield (r3.nfield), .wf0 (wf03), .nout, .texp, .flush,
    .zero (nzero)
  );

  td_round_pack u_round (
    .part (part3), .rfmt (rfmt3), .nlanes (nl3), .nout, .texp, .flush, .zero (nzero),
    .sticky (r3.sticky), .rsign (r3.rsign), .spec (r3.spec), .spec_val (r3.spec_val),
    .result (res_d)
  );

  // ---------------- stage 4: output pipeline registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      result    <= '0;
    end else begin
      out_valid <= r3.valid;
      if (r3.valid) result <= r3.f4fma ? r3.f4res : res_d;
    end
  end

endmodule
