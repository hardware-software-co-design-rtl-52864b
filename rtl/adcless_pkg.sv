// Shared constants, types and helper functions of the ADC-less in-memory
// computing (IMC) spiking-neural-network tile.
//
// The tile evaluates one SNN layer slice: binary input spikes drive the
// wordlines of resistive (ReRAM) crossbars whose bitlines are read by 1-bit
// sense amplifiers (SA) instead of multi-bit ADCs.  The SA bits of each
// weight-bit column are shifted and added into a small signed partial sum
// (PS), the PS of all crossbars are summed, and a digital leaky-integrate-
// and-fire (LIF) neuron integrates the sum into a 12-bit membrane potential.
//
// Numbers that follow the published design: 4-bit weights (NB_W), one bit
// per memory cell (SB_W), 12-bit membrane potential and threshold (U_W), leak
// lambda = 2^-n with n in [0,2] (LEAK_W holds n), Ron/Roff ratio 150.
// Type encodings (enum values, field widths of the partial sums) are this
// design's own choices.
package adcless_pkg;

  localparam int unsigned NB_W     = 4;    // bits per weight
  localparam int unsigned SB_W     = 1;    // bits per memory cell (bit slicing)
  localparam int unsigned U_W      = 12;   // membrane potential / threshold width
  localparam int unsigned LEAK_W   = 2;    // leak shift n, lambda = 2^-n, n in [0,2]
  localparam int unsigned RON_ROFF = 150;  // on/off conductance ratio of a cell
  // One crossbar's partial sum lies in [-(2^NB_W-1), 2^NB_W-1].
  localparam int unsigned PS_XB_W  = NB_W + 1;

  // How signed 4-bit weights are laid out on binary cells.
  //  MAP_ROWPAIR: positive and negative magnitude share a column, on two rows
  //               driven to Vdd and Gnd; the SA returns the sign of the
  //               bitline (+1 / 0 / -1) for each weight-bit column.
  //  MAP_COLPAIR: positive and negative magnitude on separate columns, one
  //               row per input; each SA returns h(x) (1 if any current);
  //               the negative PS is subtracted from the positive one.
  typedef enum logic [1:0] {
    MAP_ROWPAIR = 2'd1,
    MAP_COLPAIR = 2'd2
  } map_scheme_e;

  // LIF reset after a spike: subtract the threshold (soft) or clear (hard).
  typedef enum logic {
    RESET_SOFT = 1'b0,
    RESET_HARD = 1'b1
  } reset_mode_e;

  // Physical rows used by one logical input (wordline spike).
  function automatic int unsigned rows_per_input(map_scheme_e m);
    return (m == MAP_ROWPAIR) ? 2 : 1;
  endfunction

  // Physical columns used by one output neuron's weight.
  function automatic int unsigned cols_per_weight(map_scheme_e m);
    return (m == MAP_COLPAIR) ? 2 * NB_W : NB_W;
  endfunction

endpackage
