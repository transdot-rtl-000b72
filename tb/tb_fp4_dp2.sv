// tb_fp4_dp2: self-checking test of the FP4 two-term dot-product stage.
// Random FP4 vectors; each of the four results is compared with the dot product
// A[2j]*B[2j] + A[2j+1]*B[2j+1] computed in real arithmetic from the E2M1 value table
// {0, 0.5, 1, 1.5, 2, 3, 4, 6}; the 9-bit magnitude is in units of 0.25. The eight single
// products (magnitude and sign) are checked the same way. Combinational.
module tb_fp4_dp2;
  int checks = 0, failures = 0;
  logic [31:0] a, b;
  logic [8:0]  mag [4];
  logic [3:0]  sign;
  logic [7:0]  prod [8];
  logic [7:0]  psgn;

  fp4_dp2 dut (.a, .b, .mag, .sign, .prod, .psgn);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real v4(logic [3:0] x);
    real t [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    return x[3] ? -t[x[2:0]] : t[x[2:0]];
  endfunction

  initial begin
    for (int it = 0; it < 4000; it++) begin
      a = $urandom;
      b = $urandom;
      if (it < 16) begin a = {8{4'(it)}}; b = {8{4'(it)}}; end
      #1;
      for (int i = 0; i < 8; i++) begin
        real e, g;
        e = v4(a[4*i +: 4]) * v4(b[4*i +: 4]);
        g = real'(prod[i]) * 0.25;
        if (psgn[i]) g = -g;
        checks++;
        if (g != e) begin
          failures++;
          if (failures < 10) $display("ERROR prod %0d a=%h b=%h got %f exp %f", i, a, b, g, e);
        end
      end
      for (int j = 0; j < 4; j++) begin
        real e, g;
        e = v4(a[8*j +: 4]) * v4(b[8*j +: 4]) + v4(a[8*j+4 +: 4]) * v4(b[8*j+4 +: 4]);
        g = real'(mag[j]) * 0.25;
        if (sign[j]) g = -g;
        checks++;
        if (g != e || (e == 0.0 && sign[j])) begin
          failures++;
          if (failures < 10) $display("ERROR j=%0d a=%h b=%h got %f exp %f", j, a, b, g, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
