// td_normalize: merged normalization.
//
// Each lane's sum magnitude sits left-aligned in its part of an 80-bit field (full: 80 bits,
// FP16 lanes: 40, FP8 lanes: 20; the paper's (3p+5) = 77-bit normalization shifter, widened
// to a multiple of four so it can be split in quarters). Per lane a leading-one detector
// finds the most significant set bit L; its weight is E = wf0 + L. The top bit of the
// normalized lane is given the weight T = max(E, emin) of the result format, so results
// below the normal range come out as subnormals without a separate denormalization shift.
// The lane is shifted left by F-1-(T-wf0) on one shared reconfig_shifter (N = 80, LEFT).
// If the bit of weight T lies above the field (only possible when the whole sum is far
// below the smallest subnormal), the lane is flagged "flush" and left unshifted; the
// rounding stage then rounds it as a value below half the smallest subnormal.
// Outputs: the normalized field, the exponent T of each lane's top bit, and per-lane flags
// flush and zero (no bit set). Lanes are numbered 0..3; in half mode lane 1 occupies bits
// [79:40]. The paper names this stage; the leading-one/clamp scheme is this design's own.
// Purely combinational.
module td_normalize
  import td_pkg::*;
(
  input  part_e        part,
  input  fmt_e         rfmt,        // result format
  input  logic [79:0]  nfield,
  input  exp_t         wf0   [4],
  output logic [79:0]  nout,
  output exp_t         texp  [4],
  output logic [3:0]   flush,
  output logic [3:0]   zero
);

  logic [6:0] amt [4];

  always_comb begin
    int   fw, nl, lp;
    exp_t e, t, k, em;
    logic found;
    case (part)
      PART_HALF:    begin fw = 40; nl = 2; end
      PART_QUARTER: begin fw = 20; nl = 4; end
      default:      begin fw = 80; nl = 1; end
    endcase
    em = exp_t'(emin(rfmt));
    for (int q = 0; q < 4; q++) amt[q] = '0;
    for (int l = 0; l < 4; l++) begin
      texp[l]  = '0;
      flush[l] = 1'b0;
      zero[l]  = 1'b1;
      if (l < nl) begin
        // leading-one detection inside the lane
        found = 1'b0;
        lp    = 0;
        for (int j = 0; j < 80; j++)
          if (j < fw && nfield[fw*l + j]) begin
            found = 1'b1;
            lp    = j;
          end
        zero[l] = !found;
        e = wf0[l] + exp_t'(lp);
        t = (found && e > em) ? e : em;
        k = t - wf0[l];
        texp[l] = t;
        if (k > exp_t'(fw - 1)) begin
          flush[l] = 1'b1;
        end else if (found) begin
          amt[(part == PART_HALF) ? 2*l : l] = 7'(exp_t'(fw - 1) - k);
        end
      end
    end
  end

  reconfig_shifter #(.N(80), .LEFT(1'b1)) u_norm (
    .mode (part),
    .sh   (amt),
    .din  (nfield),
    .dout (nout)
  );

endmodule
