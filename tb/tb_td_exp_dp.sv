// tb_td_exp_dp: self-checking test of the merged exponent datapath.
// Random LSB exponents and zero flags in every format and mode. For FMA lanes it checks
// the addend shift s = clamp(PA + ea + eb - 2 - ec, 0, WP) (with the zero-product and
// zero-addend rules) and the window weight; for dot products the per-product alignment
// sh_i = min(pmax - pe_i, 63) with pmax over non-zero products, and the window weight
// pmax - 35 (FP8) / pmax - 23 (FP16) / -38 (FP4). Combinational.
module tb_td_exp_dp;
  import td_pkg::*;

  int checks = 0, failures = 0;
  fmt_e  fmt;
  mode_e mode;
  exp_t  ea_lsb [4], eb_lsb [4], ec_lsb [4];
  logic [3:0] pzero, czero;
  logic [5:0] sh [4];
  logic [6:0] s [4];
  exp_t  w0 [4], w0c [4];
  logic [3:0] prod_zero;

  td_exp_dp dut (.*);

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
      if (failures < 15) $display("ERROR %s fmt=%0d mode=%0d", what, fmt, mode);
    end
  endtask

  initial begin
    int pa, wp, nt, pmax, ep0, sr, es;
    bit dpa, any;
    for (int it = 0; it < 5000; it++) begin
      fmt  = fmt_e'($urandom_range(3));
      mode = (fmt == FMT_FP32) ? MODE_SCALAR : mode_e'($urandom_range(3));
      if (fmt == FMT_FP4) mode = MODE_DPA32;
      for (int i = 0; i < 4; i++) begin
        ea_lsb[i] = exp_t'($urandom_range(80) - 40);
        eb_lsb[i] = exp_t'($urandom_range(80) - 40);
        ec_lsb[i] = exp_t'($urandom_range(160) - 80);
      end
      pzero = 4'($urandom) & 4'($urandom);
      czero = 4'($urandom) & 4'($urandom) & 4'($urandom);
      #1;
      dpa = (mode == MODE_DPA32 || mode == MODE_DPA16);
      if (dpa || fmt == FMT_FP32) begin pa = 52; wp = 76; end
      else if (fmt == FMT_FP16)   begin pa = 27; wp = 38; end
      else                        begin pa = 15; wp = 19; end
      nt = (fmt == FMT_FP16) ? 2 : 4;
      pmax = -4096; any = 0;
      for (int i = 0; i < nt; i++)
        if (!pzero[i]) begin
          any = 1;
          if (ea_lsb[i] + eb_lsb[i] > pmax) pmax = ea_lsb[i] + eb_lsb[i];
        end
      for (int i = 0; i < 4; i++) begin
        if (dpa && fmt != FMT_FP4 && i < nt && !pzero[i])
          chk(sh[i] == 6'((pmax - ea_lsb[i] - eb_lsb[i] > 63) ? 63 : pmax - ea_lsb[i] - eb_lsb[i]), "sh");
      end
      for (int i = 0; i < (dpa ? 1 : 4); i++) begin
        bit pz;
        if (dpa) begin
          ep0 = (fmt == FMT_FP8) ? pmax - 35 : (fmt == FMT_FP16) ? pmax - 23 : -38;
          pz  = (fmt != FMT_FP4) && !any;
        end else begin
          ep0 = ea_lsb[i] + eb_lsb[i] - 2;
          pz  = pzero[i];
        end
        sr = pa + ep0 - ec_lsb[i];
        chk(prod_zero[i] == pz, "prod_zero");
        chk(w0c[i] == exp_t'(ec_lsb[i] - pa), "w0c");
        if (pz)             es = 0;
        else if (czero[i])  es = wp;
        else                es = (sr < 0) ? 0 : (sr > wp) ? wp : sr;
        chk(s[i] == 7'(es), "s");
        chk(w0[i] == exp_t'((pz || (!czero[i] && sr < 0)) ? ec_lsb[i] - pa : ep0), "w0");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
