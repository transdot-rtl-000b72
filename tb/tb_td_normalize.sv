// tb_td_normalize: self-checking test of the merged normalization stage.
// Random lane contents and bit-0 weights in full (FP32, FP16 and FP8 results), half and
// quarter partitioning. Per lane it checks that nothing is lost by the left shift (the
// normalized lane equals the input lane shifted by fw-1-(texp-wf0)), that texp is
// max(weight of the leading one, emin), that the top bit is set unless texp = emin, and the
// zero and flush flags. Lanes that would flush are only given values below half the
// smallest subnormal, which is what the adder stage can deliver. Combinational.
module tb_td_normalize;
  import td_pkg::*;

  int checks = 0, failures = 0;
  part_e       part;
  fmt_e        rfmt;
  logic [79:0] nfield, nout;
  exp_t        wf0 [4], texp [4];
  logic [3:0]  flush, zero;

  td_normalize dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("ERROR %s part=%0d rfmt=%0d nfield=%h", what, part, rfmt, nfield);
    end
  endtask

  initial begin
    int k, fw, nl, em, p, lp, e, t, sh;
    logic [79:0] lane, olane, msk;
    logic [159:0] wide;
    int n_fl, n_sub, n_z;
    n_fl = 0; n_sub = 0; n_z = 0;
    for (int it = 0; it < 8000; it++) begin
      k = $urandom_range(4);
      case (k)
        0: begin part = PART_FULL;    rfmt = FMT_FP32; fw = 80; nl = 1; end
        1: begin part = PART_FULL;    rfmt = FMT_FP16; fw = 80; nl = 1; end
        2: begin part = PART_FULL;    rfmt = FMT_FP8;  fw = 80; nl = 1; end
        3: begin part = PART_HALF;    rfmt = FMT_FP16; fw = 40; nl = 2; end
        default: begin part = PART_QUARTER; rfmt = FMT_FP8; fw = 20; nl = 4; end
      endcase
      em = emin(rfmt);
      p  = man_bits(rfmt) + 1;
      nfield = {$urandom, $urandom, $urandom};
      msk = (fw == 80) ? {80{1'b1}} : ((80'd1 << fw) - 1);
      for (int l = 0; l < nl; l++) begin
        wf0[l] = exp_t'(em - fw - 10 + int'($urandom_range(fw + 40)));
        lane = (nfield >> (fw * l)) & msk;
        lane = lane >> $urandom_range(fw);
        if ($urandom_range(15) == 0) lane = 0;
        if (int'(wf0[l]) <= em - fw) begin
          // keep the lane below half the smallest subnormal
          sh = em - p - 1 - int'(wf0[l]);
          lane = (sh <= 0) ? 80'd0 : (sh >= fw) ? lane : (lane & ((80'd1 << sh) - 1));
        end
        nfield = (nfield & ~(msk << (fw * l))) | (lane << (fw * l));
      end
      for (int l = nl; l < 4; l++) wf0[l] = '0;
      #1;
      for (int l = 0; l < nl; l++) begin
        lane  = (nfield >> (fw * l)) & msk;
        olane = (nout >> (fw * l)) & msk;
        lp = -1;
        for (int j = 0; j < fw; j++) if (lane[j]) lp = j;
        chk(zero[l] == (lp < 0), "zero");
        if (lp < 0) begin n_z++; continue; end
        e = int'(wf0[l]) + lp;
        t = (e > em) ? e : em;
        if (t - int'(wf0[l]) > fw - 1) begin
          chk(flush[l] == 1'b1, "flush expected");
          n_fl++;
          continue;
        end
        chk(flush[l] == 1'b0, "unexpected flush");
        chk(int'(texp[l]) == t, "texp");
        sh = fw - 1 - (t - int'(wf0[l]));
        wide = 160'(lane) << sh;
        chk(wide == 160'(olane), "shifted lane");
        chk(olane[fw - 1] || t == em, "top bit");
        if (!olane[fw - 1]) n_sub++;
      end
    end
    if (n_fl == 0 || n_sub == 0 || n_z == 0) begin
      failures++;
      $display("ERROR coverage flush=%0d sub=%0d zero=%0d", n_fl, n_sub, n_z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
