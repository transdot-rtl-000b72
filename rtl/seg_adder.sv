// seg_adder: partitioned adder, one full-width, two half-width or four quarter-width adds.
//
// A W-bit adder (W a multiple of 4) that can be split at its half and quarter boundaries.
// It is built as one (W+3)-bit ripple-free "+" with a spacer bit inserted at each quarter
// boundary. At a boundary inside a lane the spacer pair is (1,0), which passes the carry on
// unchanged; at a boundary where a lane starts the pair is (cin,cin) for that lane's carry
// in, which makes the spacer's sum bit the lower lane's carry out and injects the upper
// lane's carry in. Lane l is indexed by its lowest quarter (full: 0; half: 0, 2; quarter:
// 0..3); cin[l] and cout[l] are used only at those indices. Purely combinational.
// This is the partitioning the paper applies to "adders" in its subcomponent reuse; the
// spacer-bit construction is this design's own.
module seg_adder
  import td_pkg::*;
#(
  parameter int W = 76
) (
  input  part_e          mode,
  input  logic [W-1:0]   x,
  input  logic [W-1:0]   y,
  input  logic [3:0]     cin,
  output logic [W-1:0]   sum,
  output logic [3:0]     cout
);

  localparam int Q = W / 4;

  always_comb begin
    logic [W+3:0] xe, ye, se;
    logic [3:0]   lane_start;
    case (mode)
      PART_HALF:    lane_start = 4'b0101;
      PART_QUARTER: lane_start = 4'b1111;
      default:      lane_start = 4'b0001;
    endcase
    xe = '0;
    ye = '0;
    for (int q = 0; q < 4; q++) begin
      xe[(Q+1)*q +: Q] = x[Q*q +: Q];
      ye[(Q+1)*q +: Q] = y[Q*q +: Q];
    end
    // bit 0 of the extension is used as carry-in of lane 0 through a spacer below it
    for (int q = 1; q < 4; q++) begin
      xe[(Q+1)*q - 1] = lane_start[q] ? cin[q] : 1'b1;
      ye[(Q+1)*q - 1] = lane_start[q] ? cin[q] : 1'b0;
    end
    se = xe + ye + (W+4)'(cin[0]);
    cout = '0;
    for (int q = 0; q < 4; q++)
      sum[Q*q +: Q] = se[(Q+1)*q +: Q];
    for (int q = 1; q < 4; q++)
      cout[q-1] = se[(Q+1)*q - 1];
    cout[3] = se[(Q+1)*4 - 1];
    // report each lane's carry at the lane's own index
    case (mode)
      PART_HALF:    cout = {1'b0, cout[3], 1'b0, cout[1]};
      PART_QUARTER: ;
      default:      cout = {3'b000, cout[3]};
    endcase
  end

endmodule
