// tb_fp4_simd_fma: exhaustive self-checking test of the eight FP4 FMA lanes.
// Every combination of A element, B element, C element and operation (16*16*16*4) is run
// once, eight per step in the eight lanes. The product fed in is worked out from the E2M1
// value table; the expected lane is the exact real value (+-)A*B (+-)C rounded to the
// nearest FP4 value by searching the eight magnitudes (ties to the even mantissa bit),
// saturating at 6, with +0 for an exact zero unless both parts are -0. A final set of
// scalar steps (nlanes = 1) checks that lanes 1..7 stay zero. Combinational.
module tb_fp4_simd_fma;
  import td_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0]  prod [8];
  logic [7:0]  psgn;
  logic [31:0] c, result;
  op_e         op;
  logic [3:0]  nlanes;

  fp4_simd_fma dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real t [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};

  function automatic logic [3:0] expect_lane(logic [3:0] x, logic [3:0] y, logic [3:0] z,
                                             op_e o);
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
    if (av > 6.0) return {sg, 3'b111};
    best = 0; bd = 100.0;
    for (int k = 0; k < 8; k++) begin
      d = (av > t[k]) ? av - t[k] : t[k] - av;
      if (d < bd || (d == bd && k[0] == 0)) begin bd = d; best = k; end
    end
    return {sg, 3'(best)};
  endfunction

  initial begin
    logic [3:0] xs [8], ys [8];
    logic [3:0] ex;
    int idx, nl;
    for (int step = 0; step < 2048 + 200; step++) begin
      nl = (step < 2048) ? 8 : 1;
      nlanes = 4'(nl);
      for (int l = 0; l < 8; l++) begin
        idx = (step < 2048) ? step * 8 + l : int'($urandom_range(16383));
        xs[l] = 4'(idx);
        ys[l] = 4'(idx >> 4);
        c[4*l +: 4] = 4'(idx >> 8);
        if (l == 0) op = op_e'(idx >> 12);
        prod[l] = 8'(int'(t[xs[l][2:0]] * t[ys[l][2:0]] * 4.0));
        psgn[l] = xs[l][3] ^ ys[l][3];
      end
      #1;
      for (int l = 0; l < 8; l++) begin
        ex = (l < nl) ? expect_lane(xs[l], ys[l], c[4*l +: 4], op) : 4'd0;
        checks++;
        if (result[4*l +: 4] !== ex) begin
          failures++;
          if (failures < 10)
            $display("ERROR lane %0d a=%h b=%h c=%h op=%0d got %h exp %h", l, xs[l], ys[l],
                     c[4*l +: 4], op, result[4*l +: 4], ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
