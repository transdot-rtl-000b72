// tb_mm_multiplier: self-checking test of the multi-mode mantissa multiplier.
// Applies random significands in every format/mode and checks, one cycle later (the
// internal pipeline stage), against products computed directly from the operand fields:
//   FP32: A*B;  FP16 SIMD: the two 12x12 field products;  FP8 SIMD: the four 6x6 products;
//   FP8 DPA:  sum of +-((a_i*b_i << 35) >> sh_i);  FP16 DPA: +-((lo << 23) >> sh0) +- (hi..);
//   FP4 DPA:  sum of +-(mag_j << 36)   (all as 50-bit two's complement).
// Also checks that out holds its value while en is low.
module tb_mm_multiplier;
  import td_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [23:0] a, b;
  fmt_e  fmt;
  mode_e mode;
  logic [5:0] sh [4];
  logic [3:0] sign;
  logic [8:0] fp4_mag [4];
  logic [49:0] out;

  mm_multiplier dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [49:0] sgn(logic [49:0] v, logic s);
    return s ? -v : v;
  endfunction

  initial begin
    logic [49:0] e;
    int k;
    int n_k [6];
    foreach (n_k[i]) n_k[i] = 0;
    a = 0; b = 0; fmt = FMT_FP32; mode = MODE_SCALAR; sign = 0;
    foreach (sh[i]) sh[i] = 0;
    foreach (fp4_mag[i]) fp4_mag[i] = 0;
    @(posedge clk); #1 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      k = $urandom_range(5);
      n_k[k]++;
      a = 24'($urandom); b = 24'($urandom);
      sign = 4'($urandom);
      for (int i = 0; i < 4; i++) begin
        sh[i] = 6'($urandom_range(63));
        if ($urandom_range(1)) sh[i] = 6'($urandom_range(12));
        fp4_mag[i] = 9'($urandom_range(288));
      end
      case (k)
        0: begin fmt = FMT_FP32; mode = MODE_SCALAR; e = 50'(a) * 50'(b); end
        1: begin fmt = FMT_FP16; mode = MODE_SIMD;
                 e = {2'b00, 24'(a[23:12] * b[23:12]), 24'(a[11:0] * b[11:0])}; end
        2: begin fmt = FMT_FP8;  mode = MODE_SIMD;
                 e = '0;
                 for (int i = 0; i < 4; i++) e[12*i +: 12] = a[6*i +: 6] * b[6*i +: 6]; end
        3: begin fmt = FMT_FP8;  mode = MODE_DPA32;
                 e = '0;
                 for (int i = 0; i < 4; i++)
                   e += sgn(((50'(a[6*i +: 6] * b[6*i +: 6])) << 35) >> sh[i], sign[i]); end
        4: begin fmt = FMT_FP16; mode = MODE_DPA16;
                 e = sgn(((50'(a[11:0] * b[11:0])) << 23) >> sh[0], sign[0]) +
                     sgn(((50'(a[23:12] * b[23:12])) << 23) >> sh[1], sign[1]); end
        default: begin fmt = FMT_FP4; mode = MODE_DPA32;
                 e = '0;
                 for (int i = 0; i < 4; i++) e += sgn(50'(fp4_mag[i]) << 36, sign[i]); end
      endcase
      en = 1;
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (out !== e) begin
        failures++;
        if (failures < 10) $display("ERROR k=%0d a=%h b=%h got %h exp %h", k, a, b, out, e);
      end
      // hold while en is low
      a = ~a;
      @(posedge clk); #1;
      checks++;
      if (out !== e) begin
        failures++;
        if (failures < 10) $display("ERROR hold k=%0d", k);
      end
    end
    foreach (n_k[i]) if (n_k[i] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
