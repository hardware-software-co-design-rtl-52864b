// IAND spike-element-wise (SEW) merge of a residual block.
//
// Merges the output spikes y = F(x) of a residual block's direct path with
// the block's input spikes x (the skip connection) as g = (1 - y) * x, i.e.
// g = x AND NOT y, for every spike of a WIDTH-wide vector.  With bypass=1
// the direct-path spikes pass unchanged (layers that are not the end of a
// residual block).  Purely combinational: an inverter and an AND gate per
// spike, plus the bypass select.
// Follows the published design (the IAND function g = (1-y)x and its two-
// gate realisation).  Own choice: the bypass select and placing the merge on
// the tile's output-spike read path.
module sew_iand #(
  parameter int unsigned WIDTH = 8
) (
  input  logic [WIDTH-1:0] y,        // direct-path spikes, F(x)
  input  logic [WIDTH-1:0] x,        // skip-connection spikes
  input  logic             bypass,   // 1: no residual merge, g = y
  output logic [WIDTH-1:0] g
);

  always_comb g = bypass ? y : (x & ~y);

endmodule
