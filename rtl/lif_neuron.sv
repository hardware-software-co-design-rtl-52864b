// Digital leaky-integrate-and-fire (LIF) neuron.
//
// One neuron, one time step per enabled clock.  The module keeps the
// membrane potential U (12-bit signed register) and the last output spike S
// (1-bit register).  On every clock with en=1:
//
//   base = S ? (U - vth) : U        soft reset (RESET_HARD: S ? 0 : U)
//   U'   = sat12((base >>> leak) + in_ps)
//   S'   = (U' >= vth)
//
// i.e. the reset caused by last step's spike is applied first, then the leak
// lambda = 2^-leak is a right shift, then the summed partial sums of the
// crossbars are added.  U' and S' are registered together, so umem and spike
// always show the same time step and the reset acts on the next step.
// reset=1 (synchronous) clears U and S at the start of a sequence.
//
// Follows the published design: the subtractor / MUX / shifter / adder /
// comparator structure with a soft reset, the 12-bit potential and
// threshold, lambda quantised to 2^-n with n in {0,1,2}, the ">=" comparison,
// and one time step per clock.  Own choices: saturation to the 12-bit range
// (the quantiser's clamp), arithmetic shift rounding toward minus infinity,
// the optional hard reset, and the width IN_W of the incoming sum.
// Latency: one clock from en/in_ps to umem/spike.
module lif_neuron
  import adcless_pkg::*;
#(
  parameter int unsigned IN_W       = 12,          // width of the summed PS input
  parameter reset_mode_e RESET_MODE = RESET_SOFT
) (
  input  logic                     clk,
  input  logic                     reset,      // synchronous sequence reset
  input  logic                     en,         // advance one time step
  input  logic signed [IN_W-1:0]   in_ps,      // sum of partial sums this step
  input  logic signed [U_W-1:0]    vth,        // threshold
  input  logic        [LEAK_W-1:0] leak,       // n: lambda = 2^-n, n <= 2
  output logic signed [U_W-1:0]    umem,
  output logic                     spike
);

  localparam int unsigned WW = ((IN_W > U_W) ? IN_W : U_W) + 2;
  localparam logic signed [WW-1:0] U_MAX = WW'(2 ** (U_W - 1) - 1);
  localparam logic signed [WW-1:0] U_MIN = -WW'(2 ** (U_W - 1));

  logic signed [WW-1:0] base, leaked, sum;
  logic signed [U_W-1:0] u_next;

  always_comb begin
    if (spike)
      base = (RESET_MODE == RESET_HARD) ? '0 : (WW'(umem) - WW'(vth));
    else
      base = WW'(umem);
    leaked = base >>> leak;
    sum    = leaked + WW'(in_ps);
    if (sum > U_MAX)      u_next = U_MAX[U_W-1:0];
    else if (sum < U_MIN) u_next = U_MIN[U_W-1:0];
    else                  u_next = sum[U_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      umem  <= '0;
      spike <= 1'b0;
    end else if (en) begin
      umem  <= u_next;
      spike <= (u_next >= vth);
    end
  end

  // The leak is quantised to 2^-n with n in [0,2].
  a_leak_range : assert property (@(posedge clk) disable iff (reset) en |-> leak <= 2);

endmodule
