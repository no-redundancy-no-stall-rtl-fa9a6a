// threshold_cmp -- the comparator the VTU and the LDU share.
// A multiplexer, steered by ctrl, picks one of two thresholds and one
// comparator tests value > threshold:
//   ctrl = 1  Thr.2: reprojected-pixel count of a tile against 5/6 of its 256
//             pixels; above it the tile is interpolated, otherwise re-rendered
//   ctrl = 0  Thr.1: cumulative load of a block against (1+1/N)W; above it the
//             current tile is deferred to the next block
// Both uses and the mux come from the paper's architecture figure; the operand
// width is this design's choice. Combinational.
module threshold_cmp #(
  parameter int W = 32
) (
  input  logic         ctrl,
  input  logic [W-1:0] thr1,
  input  logic [W-1:0] thr2,
  input  logic [W-1:0] value,
  output logic         gt
);
  logic [W-1:0] thr;
  assign thr = ctrl ? thr2 : thr1;
  assign gt  = value > thr;
endmodule
