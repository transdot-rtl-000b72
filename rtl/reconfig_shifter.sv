// reconfig_shifter: multi-mode logarithmic barrel shifter.
//
// One N-bit barrel shifter that works as a single N-bit shifter (PART_FULL), as two
// independent N/2-bit shifters (PART_HALF) or as four independent N/4-bit shifters
// (PART_QUARTER). It is a conventional log2(N)-stage barrel shifter of 2:1 multiplexers in
// which, as in the paper's reconfigurable shifter, three things depend on the mode:
//   * the select of every multiplexer comes from the shift amount of the lane its bit
//     belongs to (mode-dependent shift amounts),
//   * a bit that would cross a lane boundary is replaced by zero (boundary blocking),
//   * stages whose distance is not smaller than the lane width are bypassed.
// The stage structure, the three mechanisms and the mode codes 2'b10 (half) and 2'b11
// (quarter) follow the paper; the assignment of amounts to lanes is this design's choice:
// a lane uses the amount at the index of its lowest quarter, i.e. full mode uses sh[0],
// half mode sh[0] (low half) and sh[2] (high half), quarter mode sh[q] for quarter q.
// In a lane of width w only the low $clog2(w) bits of its amount are used; amounts from w
// up to 2**$clog2(w)-1 clear the lane. LEFT selects the shift direction (zeros shifted in).
// Purely combinational.
module reconfig_shifter
  import td_pkg::*;
#(
  parameter int N    = 100,   // width; must be a multiple of 4
  parameter bit LEFT = 1'b0,  // 0: right shift (alignment), 1: left shift (normalization)
  localparam int SHW = $clog2(N)
) (
  input  part_e            mode,
  input  logic [SHW-1:0]   sh [4],
  input  logic [N-1:0]     din,
  output logic [N-1:0]     dout
);

  localparam int Q = N / 4;
  localparam int H = N / 2;

  logic [N-1:0] stage [SHW+1];

  always_comb begin
    int w, base, lane_q, src;
    logic sel;
    stage[0] = din;
    for (int k = 0; k < SHW; k++) begin
      for (int i = 0; i < N; i++) begin
        case (mode)
          PART_HALF:    begin w = H; base = (i / H) * H; end
          PART_QUARTER: begin w = Q; base = (i / Q) * Q; end
          default:      begin w = N; base = 0;           end
        endcase
        lane_q = base / Q;
        // Bypass stages that are at least as wide as the lane.
        sel = ((1 << k) < w) ? sh[lane_q][k] : 1'b0;
        src = LEFT ? i - (1 << k) : i + (1 << k);
        if (!sel)
          stage[k+1][i] = stage[k][i];
        else if (src >= base && src < base + w)
          stage[k+1][i] = stage[k][src];
        else
          stage[k+1][i] = 1'b0;
      end
    end
    dout = stage[SHW];
  end

endmodule
