// Partial-sum accumulation: adds, per output neuron, the signed partial sums
// of N_IN sources and registers the result.
//
// Used twice in the tile hierarchy: inside a processing element (PE) it adds
// the PS of the PE's crossbars, and at tile level it adds the sums of the
// PEs, giving sum_i PS_i,j for every neuron j, the value the LIF module
// integrates.  OUT_W must hold N_IN times the input range (the tile sizes
// it with $clog2).
//
// Timing: one register stage; valid_out follows valid_in by one clock and
// sum is held while valid_in is low.  Follows the published design (PS of
// several crossbars are added before the LIF); the single adder stage per
// level is this design's own choice.
module ps_accumulator #(
  parameter int unsigned N_IN     = 4,
  parameter int unsigned N_NEURON = 8,
  parameter int unsigned IN_W     = 5,
  parameter int unsigned OUT_W    = 7
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    valid_in,
  input  logic signed [IN_W-1:0]  ps_in  [N_IN][N_NEURON],
  output logic                    valid_out,
  output logic signed [OUT_W-1:0] sum_out [N_NEURON]
);

  logic signed [OUT_W-1:0] sum_c [N_NEURON];

  always_comb begin
    for (int unsigned j = 0; j < N_NEURON; j++) begin
      sum_c[j] = '0;
      for (int unsigned i = 0; i < N_IN; i++)
        sum_c[j] = sum_c[j] + OUT_W'(ps_in[i][j]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_out <= 1'b0;
      for (int unsigned j = 0; j < N_NEURON; j++) sum_out[j] <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) sum_out <= sum_c;
    end
  end

  initial assert (OUT_W >= IN_W + $clog2(N_IN))
    else $error("ps_accumulator: OUT_W too small for N_IN inputs");

endmodule
