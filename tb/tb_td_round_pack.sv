// tb_td_round_pack: self-checking test of rounding and output packing.
// td_normalize is placed in front (as in the unit) to turn a random lane magnitude, weight,
// sign and sticky bit into td_round_pack's inputs. The expected value of each lane is the
// exact value lane*2^wf0 (plus an infinitesimal when sticky is set) rounded to nearest even
// into the result format by an independent integer model, including subnormals, carries
// into the exponent, overflow to infinity and signed zeros; the lanes are then packed
// (FP32, FP16 or FP8 single result, 2 FP16 or 4 FP8 lanes, unused bits zero) and special
// values replace their lanes. Combinational.
module tb_td_round_pack;
  import td_pkg::*;

  int checks = 0, failures = 0;
  part_e       part;
  fmt_e        rfmt;
  logic [2:0]  nlanes;
  logic [79:0] nfield, nout;
  exp_t        wf0 [4], texp [4];
  logic [3:0]  flush, zero, sticky, rsign, spec;
  logic [31:0] spec_val, result;

  td_normalize  u_norm (.part, .rfmt, .nfield, .wf0, .nout, .texp, .flush, .zero);
  td_round_pack dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic signed [199:0] big_t;
  int n_sub_res = 0, n_ovf = 0, n_carry = 0, n_tie = 0;

  // RNE of (-1)^s * (mag + st/2) * 2^lsb, where st stands for "a little more"
  function automatic logic [31:0] round_to(bit s, big_t mag, bit stin, int lsb, fmt_e f);
    int mb = man_bits(f), eb = exp_bits(f), p = mb + 1;
    int bs = bias(f), emn = emin(f);
    int msb, e, q, r, be;
    big_t m;
    bit half, st;
    if (mag == 0) return 32'(s) << (mb + eb);
    msb = 0;
    for (int i = 0; i < 200; i++) if (mag[i]) msb = i;
    e = lsb + msb;
    q = ((e > emn) ? e : emn) - (p - 1);
    if (q <= lsb) begin
      m = mag << (lsb - q); half = 0; st = stin;
    end else begin
      r = q - lsb;
      if (r > 199) begin m = 0; half = 0; st = 1; end
      else begin
        m    = mag >> r;
        half = mag[r - 1];
        st   = stin | ((r >= 2) ? ((mag & ((big_t'(1) << (r - 1)) - 1)) != 0) : 0);
      end
    end
    if (half && !st) n_tie++;
    if (half && (st || m[0])) m = m + 1;
    if (m == (big_t'(1) << p)) begin m = m >> 1; q++; n_carry++; end
    if (m == 0) return 32'(s) << (mb + eb);
    be = (m >= (big_t'(1) << (p - 1))) ? q + (p - 1) + bs : 0;
    if (be == 0) n_sub_res++;
    if (be >= (1 << eb) - 1) begin
      n_ovf++;
      return (32'(s) << (mb + eb)) | (32'((1 << eb) - 1) << mb);
    end
    return (32'(s) << (mb + eb)) | (32'(be) << mb) | 32'(m & ((big_t'(1) << mb) - 1));
  endfunction

  initial begin
    int k, fw, nl, em, p, lw, sh, emx;
    logic [79:0] lane, msk;
    logic [31:0] expv, lv, lmask;
    for (int it = 0; it < 8000; it++) begin
      k = $urandom_range(4);
      case (k)
        0: begin part = PART_FULL;    rfmt = FMT_FP32; fw = 80; nl = 1; end
        1: begin part = PART_FULL;    rfmt = FMT_FP16; fw = 80; nl = 1; end
        2: begin part = PART_FULL;    rfmt = FMT_FP8;  fw = 80; nl = 1; end
        3: begin part = PART_HALF;    rfmt = FMT_FP16; fw = 40; nl = 2; end
        default: begin part = PART_QUARTER; rfmt = FMT_FP8; fw = 20; nl = 4; end
      endcase
      nlanes = 3'(nl);
      em  = emin(rfmt);
      p   = man_bits(rfmt) + 1;
      lw  = 1 + exp_bits(rfmt) + man_bits(rfmt);
      emx = em + (1 << exp_bits(rfmt)) - 3;   // largest normal exponent
      lmask = (lw == 32) ? 32'hffff_ffff : ((32'd1 << lw) - 1);
      msk = (fw == 80) ? {80{1'b1}} : ((80'd1 << fw) - 1);
      nfield = {$urandom, $urandom, $urandom};
      rsign = 4'($urandom);
      spec  = ($urandom_range(7) == 0) ? 4'($urandom) : 4'd0;
      spec_val = $urandom;
      sticky = '0;
      for (int l = 0; l < 4; l++) wf0[l] = '0;
      for (int l = 0; l < nl; l++) begin
        lane = ((nfield >> (fw * l)) & msk) >> $urandom_range(fw - 1);
        if ($urandom_range(3) == 0) begin
          // few significant bits: exercises ties and exact results
          lane = lane & ((80'd1 << (p + 2)) - 1);
        end
        if ($urandom_range(19) == 0) lane = 0;
        // weight range from far below the subnormals to beyond the overflow threshold
        wf0[l] = exp_t'(em - p - fw + int'($urandom_range(emx - em + 2 * fw + p + 4)));
        if (int'(wf0[l]) <= em - fw) begin
          sh = em - p - 1 - int'(wf0[l]);
          lane = (sh <= 0) ? 80'd0 : (sh >= fw) ? lane : (lane & ((80'd1 << sh) - 1));
        end
        // sticky only with enough bits above it (as produced by the alignment shifter)
        sticky[l] = (lane >> (p + 1)) != 0 ? 1'($urandom) : 1'b0;
        nfield = (nfield & ~(msk << (fw * l))) | (lane << (fw * l));
      end
      #1;
      expv = '0;
      for (int l = 0; l < nl; l++) begin
        lane = (nfield >> (fw * l)) & msk;
        lv = round_to(rsign[l], big_t'(lane), sticky[l], int'(wf0[l]), rfmt);
        if (spec[l]) lv = (spec_val >> (lw * l)) & lmask;
        expv = expv | ((lv & lmask) << (lw * l));
      end
      checks++;
      if (result !== expv) begin
        failures++;
        if (failures < 15)
          $display("ERROR part=%0d rfmt=%0d nfield=%h wf0=%0d st=%b got=%h exp=%h",
                   part, rfmt, nfield, wf0[0], sticky, result, expv);
      end
    end
    if (n_sub_res == 0 || n_ovf == 0 || n_carry == 0 || n_tie == 0) begin
      failures++;
      $display("ERROR coverage sub=%0d ovf=%0d carry=%0d tie=%0d", n_sub_res, n_ovf, n_carry, n_tie);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
