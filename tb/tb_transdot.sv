// tb_transdot: end-to-end self-checking testbench of the TransDot unit.
//
// Streams random operations of every format/mode/operation into the unit, one per cycle
// with occasional idle cycles, and compares each result, exactly, with a reference model
// written independently of the RTL: operands are decoded to (sign, integer significand,
// LSB exponent), the products and the addend are summed exactly in a 600-bit integer and
// the sum is rounded once to nearest-even in the result format. For dot products the
// reference applies the unit's documented window rule: each FP16/FP8 product is truncated
// (toward zero) to a resolution of 2^(pmax-23) (FP16) or 2^(pmax-35) (FP8), pmax being the
// largest LSB exponent of the non-zero products; FP4 terms are exact; an exactly-zero dot
// product result is +0. Also checks that every result arrives exactly 4 cycles after its
// operands (latency 4, one operation per cycle) and counts how often each mechanism
// occurred (each mode, effective subtraction with cancellation, subnormal and overflowed
// results, special values, a dominant addend, dot-product truncation, FP4 FMA saturation).
// FP4 scalar/SIMD FMA lanes are checked against a nearest-value search over the eight FP4
// magnitudes (ties to even, saturating at 6); a mechanism that
// never occurred counts as a failure. NOPS sets the number of operations.
module tb_transdot;
  import td_pkg::*;

  localparam int NOPS = 6000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [31:0] a, b, c;
  fmt_e  fmt;
  mode_e mode;
  op_e   op;
  logic out_valid;
  logic [31:0] result;

  transdot dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (NOPS * 3 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  typedef logic signed [599:0] big_t;

  typedef struct {
    bit          s;
    longint      sig;
    int          lsb;
    bit          zero, inf, nan;
  } val_t;

  function automatic int fp_mb(fmt_e f);
    return f == FMT_FP32 ? 23 : f == FMT_FP16 ? 10 : f == FMT_FP8 ? 3 : 1;
  endfunction
  function automatic int fp_eb(fmt_e f);
    return f == FMT_FP32 ? 8 : f == FMT_FP16 ? 5 : f == FMT_FP8 ? 4 : 2;
  endfunction

  function automatic val_t dec(logic [31:0] x, fmt_e f);
    val_t v;
    int mb = fp_mb(f), eb = fp_eb(f);
    int e = int'((x >> mb) & ((1 << eb) - 1));
    int m = int'(x & ((1 << mb) - 1));
    int bs = (1 << (eb - 1)) - 1;
    v.s    = x[mb + eb];
    v.zero = (e == 0 && m == 0);
    v.inf  = (f != FMT_FP4) && (e == (1 << eb) - 1) && (m == 0);
    v.nan  = (f != FMT_FP4) && (e == (1 << eb) - 1) && (m != 0);
    if (e == 0) begin v.sig = m;               v.lsb = 1 - bs - mb; end
    else        begin v.sig = (1 << mb) | m;   v.lsb = e - bs - mb; end
    return v;
  endfunction

  function automatic logic [31:0] qn(fmt_e f);
    return f == FMT_FP32 ? 32'h7fc00000 : f == FMT_FP16 ? 32'h7e00 : 32'h7c;
  endfunction
  function automatic logic [31:0] infv(fmt_e f, bit s);
    int mb = fp_mb(f), eb = fp_eb(f);
    return (32'(s) << (mb + eb)) | (32'((1 << eb) - 1) << mb);
  endfunction

  int n_sub_res, n_ovf, n_cancel;

  // Round sign * mag * 2^lsb to format f, nearest-even.
  function automatic logic [31:0] round_to(bit s, big_t mag, int lsb, fmt_e f);
    int mb = fp_mb(f), eb = fp_eb(f), p = mb + 1;
    int bs = (1 << (eb - 1)) - 1, emn = 1 - bs;
    int msb, e, q, r, be;
    big_t m;
    bit half, st;
    if (mag == 0) return 32'(s) << (mb + eb);
    msb = 0;
    for (int i = 0; i < 600; i++) if (mag[i]) msb = i;
    e = lsb + msb;
    q = ((e > emn) ? e : emn) - (p - 1);
    if (q <= lsb) begin
      m = mag << (lsb - q); half = 0; st = 0;
    end else begin
      r = q - lsb;
      if (r > 599) begin m = 0; half = 0; st = 1; end
      else begin
        m    = mag >> r;
        half = mag[r - 1];
        st   = (r >= 2) ? ((mag & ((big_t'(1) << (r - 1)) - 1)) != 0) : 0;
      end
    end
    if (half && (st || m[0])) m = m + 1;
    if (m == (big_t'(1) << p)) begin m = m >> 1; q++; end
    if (m == 0) return 32'(s) << (mb + eb);
    be = (m >= (big_t'(1) << (p - 1))) ? q + (p - 1) + bs : 0;
    if (be == 0) n_sub_res++;
    if (be >= (1 << eb) - 1) begin n_ovf++; return infv(f, s); end
    return (32'(s) << (mb + eb)) | (32'(be) << mb) | 32'(m & ((big_t'(1) << mb) - 1));
  endfunction

  // exact sum of terms (value = (-1)^s * mag * 2^lsb)
  typedef struct { bit s; big_t mag; int lsb; } term_t;

  int n_trunc;

  function automatic logic [31:0] sum_round(term_t t[$], fmt_e f, bit dpa, bit zs);
    int   lo = 100000;
    big_t acc = 0, mg;
    bit   allneg = 1;
    foreach (t[i]) if (t[i].lsb < lo) lo = t[i].lsb;
    foreach (t[i]) begin
      mg = t[i].mag << (t[i].lsb - lo);
      acc = t[i].s ? acc - mg : acc + mg;
    end
    if (acc == 0) begin
      // exact zero: +0, except an FMA whose product and addend are both -0
      return (!dpa && zs) ? round_to(1, 0, 0, f) : round_to(0, 0, 0, f);
    end
    if (acc < 0) return round_to(1, -acc, lo, f);
    return round_to(0, acc, lo, f);
  endfunction

  // expected lane result of an FMA
  function automatic logic [31:0] ref_fma(logic [31:0] x, logic [31:0] y, logic [31:0] z,
                                          fmt_e f, op_e o);
    val_t va = dec(x, f), vb = dec(y, f), vc = dec(z, f);
    bit ps = va.s ^ vb.s ^ o[1];
    bit cs = vc.s ^ o[0];
    term_t t[$];
    term_t tp, tc;
    if (va.nan || vb.nan || vc.nan) return qn(f);
    if ((va.inf && vb.zero) || (va.zero && vb.inf)) return qn(f);
    if ((va.inf || vb.inf) && vc.inf && ps != cs) return qn(f);
    if (va.inf || vb.inf) return infv(f, ps);
    if (vc.inf) return infv(f, cs);
    tp.s = ps; tp.mag = big_t'(va.sig) * big_t'(vb.sig); tp.lsb = va.lsb + vb.lsb;
    tc.s = cs; tc.mag = big_t'(vc.sig); tc.lsb = vc.lsb;
    t.push_back(tp);
    t.push_back(tc);
    if (ps != cs && tp.mag != 0 && tc.mag != 0) begin
      // cancellation of at least 4 leading bits
      int lo = (tp.lsb < tc.lsb) ? tp.lsb : tc.lsb;
      big_t d = (tp.mag << (tp.lsb - lo)) - (tc.mag << (tc.lsb - lo));
      big_t mx = (tp.mag << (tp.lsb - lo));
      if (d < 0) d = -d;
      if (d != 0 && (d << 4) < mx) n_cancel++;
    end
    return sum_round(t, f, 0, (tp.mag == 0) && (tc.mag == 0) && ps && cs);
  endfunction

  // expected result of a dot product
  function automatic logic [31:0] ref_dpa(logic [31:0] x, logic [31:0] y, logic [31:0] z,
                                          fmt_e f, fmt_e rf, op_e o);
    int n  = (f == FMT_FP16) ? 2 : (f == FMT_FP8) ? 4 : 8;
    int w  = 32 / n;
    val_t va [8], vb [8];
    val_t vc = dec(z, rf);
    bit cs = vc.s ^ o[0];
    bit anynan = vc.nan, inv = 0, pinf = vc.inf && !cs, ninf = vc.inf && cs;
    int pmax = -100000, res;
    term_t t[$];
    term_t tt;
    bit ps;
    for (int i = 0; i < n; i++) begin
      va[i] = dec((x >> (w * i)) & ((1 << w) - 1), f);
      vb[i] = dec((y >> (w * i)) & ((1 << w) - 1), f);
      ps = va[i].s ^ vb[i].s ^ o[1];
      anynan |= va[i].nan | vb[i].nan;
      inv    |= (va[i].inf && vb[i].zero) || (va[i].zero && vb[i].inf);
      if (va[i].inf || vb[i].inf) begin if (ps) ninf = 1; else pinf = 1; end
      if (va[i].sig != 0 && vb[i].sig != 0 && va[i].lsb + vb[i].lsb > pmax)
        pmax = va[i].lsb + vb[i].lsb;
    end
    if (anynan || inv || (pinf && ninf)) return qn(rf);
    if (pinf || ninf) return infv(rf, ninf);
    res = (f == FMT_FP16) ? pmax - 23 : pmax - 35;
    for (int i = 0; i < n; i++) begin
      tt.s   = va[i].s ^ vb[i].s ^ o[1];
      tt.mag = big_t'(va[i].sig) * big_t'(vb[i].sig);
      tt.lsb = va[i].lsb + vb[i].lsb;
      if (f != FMT_FP4 && tt.mag != 0 && tt.lsb < res) begin
        if (((tt.mag >> (res - tt.lsb)) << (res - tt.lsb)) != tt.mag) n_trunc++;
        tt.mag = tt.mag >> (res - tt.lsb);
        tt.lsb = res;
      end
      t.push_back(tt);
    end
    tt.s = cs; tt.mag = big_t'(vc.sig); tt.lsb = vc.lsb;
    t.push_back(tt);
    return sum_round(t, rf, 1, 0);
  endfunction

  // FP4 FMA lane: exact value in real arithmetic, then the nearest FP4 value (ties to the
  // even mantissa bit), saturating at +-6; an exact zero is +0 unless both parts are -0
  int n_f4sat;
  function automatic logic [3:0] ref_fp4_fma(logic [3:0] x, logic [3:0] y, logic [3:0] z,
                                             op_e o);
    real t [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    real p, cv, v, av, d, bd;
    bit  ps, cs, sg;
    int  best;
    ps = x[3] ^ y[3] ^ o[1];
    cs = z[3] ^ o[0];
    p  = t[x[2:0]] * t[y[2:0]];
    cv = t[z[2:0]];
    v  = (ps ? -p : p) + (cs ? -cv : cv);
    if (v == 0.0) return {ps & cs & (p == 0.0) & (cv == 0.0), 3'b000};
    sg = (v < 0.0);
    av = sg ? -v : v;
    if (av > 6.0) begin n_f4sat++; return {sg, 3'b111}; end
    best = 0; bd = 100.0;
    for (int k = 0; k < 8; k++) begin
      d = (av > t[k]) ? av - t[k] : t[k] - av;
      if (d < bd || (d == bd && k[0] == 0)) begin bd = d; best = k; end
    end
    return {sg, 3'(best)};
  endfunction

  function automatic logic [31:0] ref_op(logic [31:0] x, logic [31:0] y, logic [31:0] z,
                                         fmt_e f, mode_e m, op_e o);
    logic [31:0] r = 0;
    int w, n;
    if (f == FMT_FP32) return ref_fma(x, y, z, f, o);
    if (f == FMT_FP4 && (m == MODE_SCALAR || m == MODE_SIMD)) begin
      for (int i = 0; i < ((m == MODE_SCALAR) ? 1 : 8); i++)
        r |= 32'(ref_fp4_fma(x[4*i +: 4], y[4*i +: 4], z[4*i +: 4], o)) << (4 * i);
      return r;
    end
    if (m == MODE_DPA32) return ref_dpa(x, y, z, f, FMT_FP32, o);
    if (m == MODE_DPA16) return ref_dpa(x, y, z & 32'hffff, f, FMT_FP16, o);
    w = (f == FMT_FP16) ? 16 : 8;
    n = (m == MODE_SCALAR) ? 1 : 32 / w;
    for (int i = 0; i < n; i++)
      r |= ref_fma((x >> (w * i)) & ((1 << w) - 1), (y >> (w * i)) & ((1 << w) - 1),
                   (z >> (w * i)) & ((1 << w) - 1), f, o) << (w * i);
    return r;
  endfunction

  // ---------------- stimulus ----------------
  // random element of format f: mostly normal numbers near exponent ctr, some specials
  function automatic logic [31:0] rnd_el(fmt_e f, int ctr);
    int mb = fp_mb(f), eb = fp_eb(f);
    int emx = (1 << eb) - 1;
    int k = $urandom_range(99);
    int e;
    logic [31:0] m = $urandom & ((1 << mb) - 1);
    logic s = $urandom_range(1);
    if (k < 4)       begin e = 0;   m = 0;     end  // zero
    else if (k < 6)  begin e = emx; m = 0;     end  // Inf
    else if (k < 7)  begin e = emx; m = m | 1; end  // NaN
    else if (k < 14) e = 0;                         // subnormal (or zero)
    else if (k < 30) e = $urandom_range(emx - 1, 1);
    else begin
      e = ctr + $urandom_range(4) - 2;
      if (e < 1) e = 1;
      if (e > emx - 1) e = emx - 1;
    end
    if (f == FMT_FP4) e = $urandom_range(3);
    return (32'(s) << (mb + eb)) | (32'(e) << mb) | m;
  endfunction

  function automatic logic [31:0] rnd_word(fmt_e f, int ctr);
    logic [31:0] r = 0;
    int w = (f == FMT_FP32) ? 32 : (f == FMT_FP16) ? 16 : (f == FMT_FP8) ? 8 : 4;
    for (int i = 0; i < 32 / w; i++) r |= rnd_el(f, ctr) << (w * i);
    return r;
  endfunction

  typedef struct { logic [31:0] expv; int unsigned t; fmt_e f; mode_e m; } pend_t;
  pend_t q[$];

  int n_mode [4][4];     // [fmt][mode]
  int n_spec, n_dom, n_lat_bad;

  // score-board: compare results as they appear
  always @(posedge clk) begin
    if (out_valid && rst_n) begin
      pend_t pe;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("ERROR: unexpected result %h", result);
      end else begin
        pe = q.pop_front();
        if (cycle - pe.t != 4) begin
          failures++;
          n_lat_bad++;
          if (n_lat_bad < 5) $display("ERROR: latency %0d", cycle - pe.t);
        end
        if (result !== pe.expv) begin
          failures++;
          if (failures < 20)
            $display("ERROR: fmt=%0d mode=%0d got %h exp %h", pe.f, pe.m, result, pe.expv);
        end
      end
    end
  end

  initial begin
    pend_t pe;
    logic [31:0] ra, rb, rc, ex;
    fmt_e  rf;
    mode_e rm;
    op_e   ro;
    int    ctr, sel;
    in_valid = 0; a = 0; b = 0; c = 0; fmt = FMT_FP32; mode = MODE_SCALAR; op = OP_FMADD;
    n_sub_res = 0; n_ovf = 0; n_cancel = 0; n_trunc = 0; n_spec = 0; n_dom = 0;
    n_lat_bad = 0; n_f4sat = 0;
    foreach (n_mode[i, j]) n_mode[i][j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    for (int n = 0; n < NOPS; n++) begin
      sel = $urandom_range(13);
      case (sel)
        0, 1:  begin rf = FMT_FP32; rm = MODE_SCALAR; end
        2:     begin rf = FMT_FP16; rm = MODE_SCALAR; end
        3:     begin rf = FMT_FP16; rm = MODE_SIMD;   end
        4:     begin rf = FMT_FP8;  rm = MODE_SCALAR; end
        5:     begin rf = FMT_FP8;  rm = MODE_SIMD;   end
        6:     begin rf = FMT_FP16; rm = MODE_DPA32;  end
        7:     begin rf = FMT_FP8;  rm = MODE_DPA32;  end
        8:     begin rf = FMT_FP4;  rm = MODE_DPA32;  end
        9:     begin rf = FMT_FP16; rm = MODE_DPA16;  end
        11:    begin rf = FMT_FP4;  rm = MODE_SIMD;   end
        12:    begin rf = FMT_FP4;  rm = MODE_SCALAR; end
        10:    begin rf = FMT_FP8;  rm = MODE_DPA16;  end
        default: begin rf = FMT_FP4; rm = MODE_DPA16; end
      endcase
      ro  = op_e'($urandom_range(3));
      ctr = (rf == FMT_FP32) ? 127 : (rf == FMT_FP16) ? 15 : 7;
      if ($urandom_range(3) == 0) ctr = $urandom_range(2 * ctr);
      ra = rnd_word(rf, ctr);
      rb = rnd_word(rf, ctr);
      if (rm == MODE_DPA32)      rc = rnd_word(FMT_FP32, $urandom_range(3) == 0 ? $urandom_range(250) : 127 + $urandom_range(8) - 4);
      else if (rm == MODE_DPA16) rc = {16'h0, rnd_word(FMT_FP16, 15)} & 32'hffff;
      else if (rf == FMT_FP32 && $urandom_range(3) == 0) begin
        // B = 1.0 and C close to -A: cancellation
        rb = 32'h3f80_0000;
        rc = (ra ^ 32'h8000_0000) ^ 32'($urandom_range(3));
        if (ro[0] ^ ro[1]) rc[31] = ~rc[31];
      end else if (rf == FMT_FP32 && $urandom_range(7) == 0) begin
        rc = rnd_word(rf, 250);   // dominant addend
        n_dom++;
      end else rc = rnd_word(rf, ctr);
      // dot products with cancelling terms
      if ((rm == MODE_DPA32 || rm == MODE_DPA16) && rf == FMT_FP8 && $urandom_range(3) == 0) begin
        rb[15:8] = rb[7:0] ^ 8'h80;
        ra[15:8] = ra[7:0];
      end
      ex = ref_op(ra, rb, rc, rf, rm, ro);
      if (ex == qn(FMT_FP32) || ex[15:0] == 16'h7e00 || ex[7:0] == 8'h7c) n_spec++;
      n_mode[rf][rm]++;
      // issue
      a = ra; b = rb; c = rc; fmt = rf; mode = rm; op = ro; in_valid = 1;
      pe.expv = ex; pe.t = cycle; pe.f = rf; pe.m = rm;
      q.push_back(pe);
      @(posedge clk);
      #1;
      if ($urandom_range(15) == 0) begin
        in_valid = 0;
        @(posedge clk);
        #1;
      end
    end
    in_valid = 0;
    repeat (8) @(posedge clk);
    // mechanism coverage
    begin
      int cov [string];
      cov["fp32_fma"]    = n_mode[FMT_FP32][MODE_SCALAR];
      cov["fp16_scalar"] = n_mode[FMT_FP16][MODE_SCALAR];
      cov["fp16_simd"]   = n_mode[FMT_FP16][MODE_SIMD];
      cov["fp8_scalar"]  = n_mode[FMT_FP8][MODE_SCALAR];
      cov["fp8_simd"]    = n_mode[FMT_FP8][MODE_SIMD];
      cov["fp16_dpa32"]  = n_mode[FMT_FP16][MODE_DPA32];
      cov["fp8_dpa32"]   = n_mode[FMT_FP8][MODE_DPA32];
      cov["fp4_dpa32"]   = n_mode[FMT_FP4][MODE_DPA32];
      cov["fp16_dpa16"]  = n_mode[FMT_FP16][MODE_DPA16];
      cov["fp8_dpa16"]   = n_mode[FMT_FP8][MODE_DPA16];
      cov["fp4_dpa16"]   = n_mode[FMT_FP4][MODE_DPA16];
      cov["fp4_simd"]    = n_mode[FMT_FP4][MODE_SIMD];
      cov["fp4_scalar"]  = n_mode[FMT_FP4][MODE_SCALAR];
      cov["fp4_saturation"] = n_f4sat;
      cov["cancellation"] = n_cancel;
      cov["subnormal_result"] = n_sub_res;
      cov["overflow"]    = n_ovf;
      cov["nan_result"]  = n_spec;
      cov["dominant_addend"] = n_dom;
      cov["dpa_truncation"] = n_trunc;
      foreach (cov[k]) begin
        $display("coverage %-18s %0d", k, cov[k]);
        checks++;
        if (cov[k] == 0) begin
          failures++;
          $display("ERROR: mechanism %s never happened", k);
        end
      end
    end
    if (q.size() != 0) begin
      failures++;
      $display("ERROR: %0d results missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
