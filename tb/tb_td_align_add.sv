// tb_td_align_add: self-checking test of the merged alignment shifter and adder.
// For random products, addends, shift amounts and signs in full (FMA and dot-product),
// half and quarter partitioning, computes the exact lane result
//     R = (+-)P + (+-)C * 2^(PA - s)      (P: product field, integer units of window bit 0)
// with wide integers and checks that each lane's magnitude in the normalization field is
// floor(|R|), that the sticky bit is set exactly when |R| is not an integer, the sign of R
// (+0 for exact cancellation), the weight of field bit 0, and the zero-product rule (the
// addend is then not shifted and w0c applies). Combinational.
module tb_td_align_add;
  import td_pkg::*;

  int checks = 0, failures = 0;
  fmt_e  fmt;
  mode_e mode;
  logic [49:0] mout;
  logic [3:0]  psign, csign;
  logic [23:0] csig [4];
  logic [6:0]  s [4];
  exp_t        w0 [4], w0c [4], wf0 [4];
  logic [79:0] nfield;
  logic [3:0]  rsign, sticky;

  td_align_add dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic signed [255:0] w_t;
  localparam int K = 100;   // fixed-point scale of the reference

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("ERROR %s fmt=%0d mode=%0d mout=%h", what, fmt, mode, mout);
    end
  endtask

  initial begin
    int k, nl, pa, wp, fw, off, shf;
    bit dpa, pz, ps;
    w_t P, C, R, mag, gotm;
    logic [79:0] lane;
    logic [49:0] dm;
    int n_sub, n_neg, n_st;
    n_sub = 0; n_neg = 0; n_st = 0;
    for (int it = 0; it < 6000; it++) begin
      k = $urandom_range(3);
      case (k)
        0: begin fmt = FMT_FP32; mode = MODE_SCALAR; nl = 1; pa = 52; wp = 76; fw = 80; off = 3; end
        1: begin fmt = FMT_FP8;  mode = MODE_DPA32;  nl = 1; pa = 52; wp = 76; fw = 80; off = 3; end
        2: begin fmt = FMT_FP16; mode = MODE_SIMD;   nl = 2; pa = 27; wp = 38; fw = 40; off = 1; end
        default: begin fmt = FMT_FP8; mode = MODE_SIMD; nl = 4; pa = 15; wp = 19; fw = 20; off = 0; end
      endcase
      dpa = (k == 1);
      mout = {$urandom, $urandom} & ((64'd1 << 50) - 1);
      if (k == 0) mout[49:48] = 0;
      if (k == 1 && $urandom_range(1)) mout = mout >> $urandom_range(49);
      if ($urandom_range(9) == 0) mout = 0;
      psign = 4'($urandom); csign = 4'($urandom);
      for (int i = 0; i < 4; i++) begin
        csig[i] = 24'($urandom);
        if (k == 2) csig[i] = csig[i] & 24'h7ff;
        if (k == 3) csig[i] = csig[i] & 24'hf;
        s[i]   = 7'($urandom_range(wp));
        w0[i]  = exp_t'($urandom_range(200) - 100);
        w0c[i] = exp_t'($urandom_range(200) - 100);
      end
      #1;
      for (int l = 0; l < nl; l++) begin
        case (k)
          0: P = w_t'({mout[47:0], 2'b00});
          1: begin dm = mout[49] ? -mout : mout; P = w_t'(dm); end
          2: P = w_t'({mout[24*l +: 22], 2'b00});
          default: P = w_t'({mout[12*l +: 8], 2'b00});
        endcase
        ps = (k == 1) ? mout[49] : psign[l];
        pz = (P == 0);
        shf = pz ? 0 : s[l];
        C = w_t'(csig[l]) << (K + pa - shf);
        R = (ps ? -(P << K) : (P << K)) + (csign[l] ? -C : C);
        mag = (R < 0) ? -R : R;
        lane = (nfield >> (fw * l)) & ((80'd1 << fw) - 1);
        gotm = w_t'(lane >> off);
        chk(gotm == (mag >> K), "magnitude");
        chk(sticky[l] == ((mag & ((w_t'(1) << K) - 1)) != 0), "sticky");
        if (R != 0) chk(rsign[l] == (R < 0), "sign");
        else chk(rsign[l] == (ps & csign[l]), "zero sign");
        chk(wf0[l] == exp_t'((pz ? w0c[l] : w0[l]) - off), "wf0");
        if (ps != csign[l]) n_sub++;
        if (R < 0 && ps == 0) n_neg++;
        if (sticky[l]) n_st++;
      end
    end
    if (n_sub == 0 || n_neg == 0 || n_st == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
