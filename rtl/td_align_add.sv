// td_align_add: merged alignment shifter and 76-bit adder.
//
// Follows the FPnew-style FMA scheme the paper builds on: the addend significand is placed
// at the top of its lane of a (4p+4)-bit = 100-bit right shifter and shifted by the
// amount from the exponent datapath; the upper 3p+4 bits of the lane form the addend
// window, the rest is ORed into a sticky bit. The window is added to (or, for an effective
// subtraction, subtracted from) the product field in a (3p+4) = 76-bit partitioned adder.
// Both the shifter (reconfig_shifter, N=100) and the adder (seg_adder, W=76) are shared
// by the lanes: full width for FP32 and all dot products, two halves (50/38 bits) for FP16,
// four quarters (25/19 bits) for FP8. Lane layouts inside the adder partition:
//   full:    product  [49:0] (FMA: product<<2; DPA: |50-bit sum|), addend LSB at bit 52
//   half:    product  [23:0] (22-bit product<<2),                   addend LSB at bit 27
//   quarter: product  [9:0]  (8-bit product<<2),                    addend LSB at bit 15
// An effective subtraction adds the inverted window with carry-in = !sticky, i.e. computes
// P - A - 1 when bits were shifted out; a negative result (no carry out) is then
// complemented, and incremented only if no sticky bits exist, which gives the exact
// magnitude with the sticky bit still describing the remainder. If the product turns out to
// be zero (known only now for dot products) the addend is not shifted and the window weight
// w0c is used. Output: each lane's (WP+1)-bit magnitude left-aligned in its part of an
// 80-bit normalization field (80/40/20 bits), the result sign, the sticky bit and the weight
// of bit 0 of the lane's field. Purely combinational.
module td_align_add
  import td_pkg::*;
(
  input  fmt_e         fmt,
  input  mode_e        mode,
  input  logic [49:0]  mout,        // multiplier output
  input  logic [3:0]   psign,       // FMA product signs
  input  logic [23:0]  csig  [4],
  input  logic [3:0]   csign,
  input  logic [6:0]   s     [4],
  input  exp_t         w0    [4],
  input  exp_t         w0c   [4],
  output logic [79:0]  nfield,
  output logic [3:0]   rsign,
  output logic [3:0]   sticky,
  output exp_t         wf0   [4]
);

  part_e       part;
  logic        dpa;
  logic [75:0] pf;               // product fields
  logic [3:0]  pz;               // product field is zero
  logic [3:0]  ps;               // product signs
  logic [99:0] ash_in, ash_out;
  logic [6:0]  ash_amt [4];
  logic [75:0] awin, addy, sum1, x2, sum2;
  logic [3:0]  effsub, cin1, cout1, neg, cin2, cout2;
  logic [3:0]  lane_on;
  logic [3:0]  zq, zl;

  assign part = part_of(fmt, mode);
  assign dpa  = (mode == MODE_DPA32) || (mode == MODE_DPA16);

  // lanes are indexed by their lowest quarter
  always_comb begin
    case (part)
      PART_HALF:    lane_on = 4'b0101;
      PART_QUARTER: lane_on = 4'b1111;
      default:      lane_on = 4'b0001;
    endcase
  end

  // ---- product fields and addend placement ----
  always_comb begin
    logic [49:0] dmag;
    dmag   = mout[49] ? -mout : mout;
    pf     = '0;
    ash_in = '0;
    ps     = psign;
    pz     = '0;
    for (int q = 0; q < 4; q++) ash_amt[q] = '0;
    case (part)
      PART_HALF: begin
        for (int i = 0; i < 2; i++) begin
          pf[38*i +: 24]      = {mout[24*i +: 22], 2'b00};
          pz[2*i]             = (mout[24*i +: 22] == '0);
          ps[2*i]             = psign[i];
          ash_in[50*i+39 +: 11] = csig[i][10:0];
          ash_amt[2*i]        = pz[2*i] ? 7'd0 : s[i];
        end
      end
      PART_QUARTER: begin
        for (int i = 0; i < 4; i++) begin
          pf[19*i +: 10]      = {mout[12*i +: 8], 2'b00};
          pz[i]               = (mout[12*i +: 8] == '0);
          ash_in[25*i+21 +: 4] = csig[i][3:0];
          ash_amt[i]          = pz[i] ? 7'd0 : s[i];
        end
      end
      default: begin
        pf[49:0]      = dpa ? dmag : {mout[47:0], 2'b00};
        pz[0]         = dpa ? (mout == '0) : (mout[47:0] == '0);
        ps[0]         = dpa ? mout[49] : psign[0];
        ash_in[99:76] = csig[0];
        ash_amt[0]    = pz[0] ? 7'd0 : s[0];
      end
    endcase
  end

  reconfig_shifter #(.N(100), .LEFT(1'b0)) u_align (
    .mode (part),
    .sh   (ash_amt),
    .din  (ash_in),
    .dout (ash_out)
  );

  // ---- addend windows, stk bits, effective operation ----
  logic [3:0] cs, stk, rs;   // indexed by a lane's lowest quarter

  always_comb begin
    awin   = '0;
    stk = '0;
    cs     = '0;
    case (part)
      PART_HALF: begin
        for (int i = 0; i < 2; i++) begin
          awin[38*i +: 38] = ash_out[50*i+12 +: 38];
          stk[2*i]      = |ash_out[50*i +: 12];
          cs[2*i]          = csign[i];
        end
      end
      PART_QUARTER: begin
        for (int i = 0; i < 4; i++) begin
          awin[19*i +: 19] = ash_out[25*i+6 +: 19];
          stk[i]        = |ash_out[25*i +: 6];
          cs[i]            = csign[i];
        end
      end
      default: begin
        awin      = ash_out[99:24];
        stk[0] = |ash_out[23:0];
        cs[0]     = csign[0];
      end
    endcase
    effsub = (ps ^ cs) & lane_on;
    cin1   = effsub & ~stk;
    addy   = awin;
    for (int q = 0; q < 4; q++) begin
      // a lane's inversion covers all quarters it owns
      case (part)
        PART_HALF:    if (effsub[(q/2)*2]) addy[19*q +: 19] = ~awin[19*q +: 19];
        PART_QUARTER: if (effsub[q])       addy[19*q +: 19] = ~awin[19*q +: 19];
        default:      if (effsub[0])       addy[19*q +: 19] = ~awin[19*q +: 19];
      endcase
    end
  end

  seg_adder #(.W(76)) u_add (
    .mode (part), .x (pf), .y (addy), .cin (cin1), .sum (sum1), .cout (cout1)
  );

  // ---- complement of negative results ----
  always_comb begin
    neg  = effsub & ~cout1;
    cin2 = neg & ~stk;
    x2   = sum1;
    for (int q = 0; q < 4; q++) begin
      case (part)
        PART_HALF:    if (neg[(q/2)*2]) x2[19*q +: 19] = ~sum1[19*q +: 19];
        PART_QUARTER: if (neg[q])       x2[19*q +: 19] = ~sum1[19*q +: 19];
        default:      if (neg[0])       x2[19*q +: 19] = ~sum1[19*q +: 19];
      endcase
    end
    // exact cancellation gives +0 (round to nearest even)
    for (int q = 0; q < 4; q++) zq[q] = (sum1[19*q +: 19] == '0);
    case (part)
      PART_HALF:    zl = {1'b0, &zq[3:2], 1'b0, &zq[1:0]};
      PART_QUARTER: zl = zq;
      default:      zl = {3'b000, &zq};
    endcase
    rs = '0;
    for (int l = 0; l < 4; l++)
      rs[l] = neg[l] ? cs[l] : (ps[l] & ~(effsub[l] & zl[l] & ~stk[l]));
  end

  seg_adder #(.W(76)) u_negate (
    .mode (part), .x (x2), .y (76'd0), .cin (cin2), .sum (sum2), .cout (cout2)
  );
  // cout2 is never set: a complemented negative sum cannot overflow its lane.

  // ---- pack magnitudes into the normalization field ----
  always_comb begin
    logic [3:0] top;   // carry bit above each lane's sum (effective addition only)
    top    = cout1 & ~effsub;
    nfield = '0;
    for (int l = 0; l < 4; l++) wf0[l] = '0;
    rsign  = rs;
    sticky = stk;
    if (part == PART_HALF) begin   // outputs are indexed by lane number
      rsign  = {2'b00, rs[2], rs[0]};
      sticky = {2'b00, stk[2], stk[0]};
    end
    case (part)
      PART_HALF: begin
        for (int i = 0; i < 2; i++) begin
          nfield[40*i+1 +: 39] = {top[2*i], sum2[38*i +: 38]};
          wf0[i] = (pz[2*i] ? w0c[i] : w0[i]) - exp_t'(1);
        end
      end
      PART_QUARTER: begin
        for (int i = 0; i < 4; i++) begin
          nfield[20*i +: 20] = {top[i], sum2[19*i +: 19]};
          wf0[i] = pz[i] ? w0c[i] : w0[i];
        end
      end
      default: begin
        nfield[79:3] = {top[0], sum2};
        wf0[0] = (pz[0] ? w0c[0] : w0[0]) - exp_t'(3);
      end
    endcase
  end

endmodule
