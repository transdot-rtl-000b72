// tb_reconfig_shifter: self-checking test of the multi-mode barrel shifter.
// Drives a 100-bit right shifter and an 80-bit left shifter (the two sizes the unit uses)
// with random data, modes and per-lane amounts, and compares every lane with a plain
// shift of that lane alone (amounts limited to the bits a lane of that width uses).
// Both instances are combinational; a watchdog ends a hung run.
module tb_reconfig_shifter;
  import td_pkg::*;

  int checks = 0, failures = 0;
  part_e       mode;
  logic [6:0]  shr [4], shl [4];
  logic [99:0] rin, rout;
  logic [79:0] lin, lout;

  reconfig_shifter #(.N(100), .LEFT(1'b0)) u_r (.mode, .sh (shr), .din (rin), .dout (rout));
  reconfig_shifter #(.N(80),  .LEFT(1'b1)) u_l (.mode, .sh (shl), .din (lin), .dout (lout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lanes(part_e m);
    return m == PART_FULL ? 1 : m == PART_HALF ? 2 : 4;
  endfunction

  initial begin
    int n_mode [4];
    foreach (n_mode[i]) n_mode[i] = 0;
    for (int it = 0; it < 3000; it++) begin
      int k, nl, wr, wl, br, bl;
      k = $urandom_range(2);
      mode = (k == 0) ? PART_FULL : (k == 1) ? PART_HALF : PART_QUARTER;
      nl = lanes(mode);
      wr = 100 / nl;
      wl = 80 / nl;
      br = $clog2(wr);
      bl = $clog2(wl);
      for (int i = 0; i < 4; i++) begin
        rin[25*i +: 25] = 25'($urandom);
        lin[20*i +: 20] = 20'($urandom);
        shr[i] = 7'($urandom);
        shl[i] = 7'($urandom);
      end
      #1;
      n_mode[k]++;
      for (int l = 0; l < nl; l++) begin
        int q, ar, al;
        logic [99:0] er, gr;
        logic [79:0] el, gl;
        q  = l * 4 / nl;           // amount index: lowest quarter of the lane
        ar = shr[q] & ((1 << br) - 1);
        al = shl[q] & ((1 << bl) - 1);
        er = ((rin >> (wr * l)) & ((100'd1 << wr) - 1)) >> ar;
        gr = (rout >> (wr * l)) & ((100'd1 << wr) - 1);
        el = (((lin >> (wl * l)) & ((80'd1 << wl) - 1)) << al) & ((80'd1 << wl) - 1);
        gl = (lout >> (wl * l)) & ((80'd1 << wl) - 1);
        checks += 2;
        if (gr !== er) begin
          failures++;
          if (failures < 10) $display("ERROR right mode=%0d lane=%0d amt=%0d got %h exp %h", k, l, ar, gr, er);
        end
        if (gl !== el) begin
          failures++;
          if (failures < 10) $display("ERROR left mode=%0d lane=%0d amt=%0d got %h exp %h", k, l, al, gl, el);
        end
      end
    end
    for (int k = 0; k < 3; k++) if (n_mode[k] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
