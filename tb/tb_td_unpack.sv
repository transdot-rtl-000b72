// tb_td_unpack: self-checking test of input processing, classification and special cases.
// Random operand words in every format and mode: checks the multiplier operand layout, the
// LSB exponents, zero flags and signs of every element against a table-free reference
// decode (value = significand * 2^lsb), the addend lanes (including the FP16 addend moved
// to the top of the 24-bit slot for FP16 accumulation) and directed special cases
// (NaN propagation, Inf*0, Inf-Inf, Inf results) in FMA and dot-product modes.
// Combinational block; a watchdog ends a hung run.
module tb_td_unpack;
  import td_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] a, b, c;
  fmt_e  fmt;
  mode_e mode;
  op_e   op;
  mode_e mode_eff;
  logic [23:0] ma, mb;
  exp_t ea_lsb [4], eb_lsb [4], ec_lsb [4];
  logic [3:0] pzero, psign, czero, csign, spec;
  logic [23:0] csig [4];
  logic [31:0] spec_val;

  td_unpack dut (.*);

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
      if (failures < 15) $display("ERROR %s fmt=%0d mode=%0d a=%h b=%h c=%h", what, fmt, mode, a, b, c);
    end
  endtask

  // reference: significand and LSB exponent of an element of width w with e exponent bits
  task automatic ref_dec(input logic [31:0] x, input int w, input int e, output longint sig,
                         output int lsb, output bit s);
    int m = w - 1 - e;
    int ex = int'((x >> m) & ((1 << e) - 1));
    int bs = (1 << (e - 1)) - 1;
    s   = x[w - 1];
    sig = (x & ((1 << m) - 1)) + ((ex != 0) ? (1 << m) : 0);
    lsb = ((ex == 0) ? 1 : ex) - bs - m;
  endtask

  initial begin
    longint sg;
    int lb, w, eb, nl;
    bit s;
    for (int it = 0; it < 3000; it++) begin
      fmt  = fmt_e'($urandom_range(2));
      mode = mode_e'($urandom_range(3));
      op   = op_e'($urandom_range(3));
      a = $urandom; b = $urandom; c = $urandom;
      if ($urandom_range(7) == 0) a = 0;
      #1;
      w  = (fmt == FMT_FP32) ? 32 : (fmt == FMT_FP16) ? 16 : 8;
      eb = (fmt == FMT_FP32) ? 8 : (fmt == FMT_FP16) ? 5 : 4;
      nl = 32 / w;
      chk(mode_eff == ((fmt == FMT_FP32) ? MODE_SCALAR : mode), "mode_eff");
      for (int i = 0; i < nl; i++) begin
        int seg;
        seg = 24 / nl;
        ref_dec(a >> (w * i), w, eb, sg, lb, s);
        chk(((ma >> (seg * i)) & ((24'd1 << seg) - 24'd1)) == 24'(sg), "ma");
        chk(ea_lsb[i] == exp_t'(lb), "ea_lsb");
        chk(pzero[i] == ((sg == 0) || (((b >> (w * i)) & ((1 << (w - 1)) - 1)) == 0)), "pzero");
        chk(psign[i] == (a[w*i + w - 1] ^ b[w*i + w - 1] ^ op[1]), "psign");
      end
      if (mode_eff == MODE_DPA16) begin
        ref_dec(c, 16, 5, sg, lb, s);
        chk(csig[0] == 24'(sg << 13) && ec_lsb[0] == exp_t'(lb - 13), "c16");
      end else if (mode_eff == MODE_DPA32 || fmt == FMT_FP32) begin
        ref_dec(c, 32, 8, sg, lb, s);
        chk(csig[0] == 24'(sg) && ec_lsb[0] == exp_t'(lb), "c32");
        chk(csign[0] == (c[31] ^ op[0]), "csign");
      end else begin
        for (int i = 0; i < nl; i++) begin
          ref_dec(c >> (w * i), w, eb, sg, lb, s);
          chk(csig[i] == 24'(sg) && ec_lsb[i] == exp_t'(lb) && czero[i] == (sg == 0), "c lane");
        end
      end
    end
    // directed special cases, FP32 FMA
    fmt = FMT_FP32; mode = MODE_SCALAR; op = OP_FMADD;
    a = 32'h7f80_0000; b = 32'h0000_0000; c = 32'h3f80_0000; #1;
    chk(spec[0] && spec_val == 32'h7fc0_0000, "inf*0");
    a = 32'h0000_0000; b = 32'hff80_0000; c = 32'h3f80_0000; #1;
    chk(spec[0] && spec_val == 32'h7fc0_0000, "0*inf");
    a = 32'h7f80_0000; b = 32'h3f80_0000; c = 32'hff80_0000; #1;
    chk(spec[0] && spec_val == 32'h7fc0_0000, "inf-inf");
    a = 32'hff80_0000; b = 32'h3f80_0000; c = 32'h3f80_0000; #1;
    chk(spec[0] && spec_val == 32'hff80_0000, "-inf");
    a = 32'h3f80_0000; b = 32'h7f80_0001; c = 32'h3f80_0000; #1;
    chk(spec[0] && spec_val == 32'h7fc0_0000, "nan");
    a = 32'h3f80_0000; b = 32'h3f80_0000; c = 32'h3f80_0000; #1;
    chk(spec == 4'b0000, "no spec");
    // FP16 SIMD: lane 1 Inf, lane 0 normal
    fmt = FMT_FP16; mode = MODE_SIMD; op = OP_FNMADD;
    a = 32'h7c00_3c00; b = 32'h3c00_3c00; c = 32'h0000_0000; #1;
    chk(spec == 4'b0010 && spec_val == 32'hfc00_0000, "fp16 lane inf");
    // FP8 SIMD: lane 2 is 0*Inf, lane 1 Inf*0, lane 3 Inf + C
    fmt = FMT_FP8; mode = MODE_SIMD; op = OP_FMADD;
    a = 32'h3800_7838; b = 32'h3878_0038; c = 32'h0000_0000; #1;
    chk(spec == 4'b0110 && spec_val == 32'h007c_7c00, "fp8 lane 0*inf");
    a = 32'h7800_0000; b = 32'h3800_0000; #1;
    chk(spec == 4'b1000 && spec_val == 32'h7800_0000, "fp8 lane inf");
    // FP8 dot product: 0*Inf term -> NaN
    mode = MODE_DPA32;
    a = 32'h0000_3800; b = 32'h0000_3878; c = 0; #1;
    chk(spec[0] && spec_val == 32'h7fc0_0000, "dpa 0*inf");
    // FP8 dot product: +Inf and -Inf products -> NaN
    fmt = FMT_FP8; mode = MODE_DPA32; op = OP_FMADD;
    a = 32'h0000_7878; b = 32'h0000_b838; c = 0; #1;
    chk(spec[0] && spec_val == 32'h7fc0_0000, "dpa inf-inf");
    b = 32'h0000_3838; #1;
    chk(spec[0] && spec_val == 32'h7f80_0000, "dpa inf");
    // FP4 scalar request runs as a dot product
    fmt = FMT_FP4; mode = MODE_SIMD; #1;
    chk(mode_eff == MODE_DPA32 && spec == 0, "fp4 mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
