// One ADC-less crossbar: row decoder, ReRAM array with a sense amplifier per
// bitline, and the shift-and-add stage.
//
// XBAR binary input spikes (one time step) drive the wordlines; the array
// holds the 4-bit weights of N_NEURON output neurons, one bit per cell; each
// bitline is sensed by a 1-bit SA, and the shift-and-add stage returns one
// signed partial sum per neuron, ps[j] in [-15,15].  N_COL physical columns
// (default XBAR, a square array) hold N_COL/4 neurons with the row-pair
// mapping or N_COL/8 with the column-pair mapping; the row-pair mapping
// uses 2*XBAR physical rows.
//
// Timing: spikes and sense_en in cycle k, ps valid in cycle k+1 (the SAs
// latch at the end of the compute-sense cycle; shift-and-add is
// combinational after them).  Programming: prog_en=1 writes prog_data into
// physical row prog_row at the clock edge; no sensing should be requested in
// the same cycle (the wordlines are idle while programming).
//
// Follows the published design (Fig. 4c structure; the two weight mappings;
// crossbar sizes of 32, 64 or 128 inputs).  Own choices: the programming
// port, the square default of N_COL.
module adcless_crossbar
  import adcless_pkg::*;
#(
  parameter int unsigned XBAR          = 64,
  parameter map_scheme_e MAP_SCHEME    = MAP_COLPAIR,
  parameter int unsigned N_COL         = XBAR,
  localparam int unsigned N_NEURON     = N_COL / cols_per_weight(MAP_SCHEME),
  localparam int unsigned ROWS         = XBAR * rows_per_input(MAP_SCHEME),
  localparam int unsigned RA_W         = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      prog_en,
  input  logic [RA_W-1:0]           prog_row,
  input  logic [N_COL-1:0]          prog_data,
  input  logic [XBAR-1:0]           spikes,
  input  logic                      sense_en,
  output logic signed [PS_XB_W-1:0] ps [N_NEURON]
);

  localparam int unsigned COLS = N_NEURON * cols_per_weight(MAP_SCHEME);

  logic [ROWS-1:0] wl, row_we;
  logic [COLS-1:0] sa_hi, sa_lo;

  row_decoder #(.XBAR(XBAR), .MAP_SCHEME(MAP_SCHEME)) u_dec (
    .spikes  (spikes),
    .prog_en (prog_en),
    .prog_row(prog_row),
    .wl      (wl),
    .row_we  (row_we)
  );

  xbar_sa_array #(.ROWS(ROWS), .COLS(COLS), .MAP_SCHEME(MAP_SCHEME)) u_array (
    .clk      (clk),
    .row_we   (row_we),
    .prog_data(prog_data[COLS-1:0]),
    .wl       (wl),
    .sense_en (sense_en && !prog_en),
    .sa_hi    (sa_hi),
    .sa_lo    (sa_lo)
  );

  shift_add #(.MAP_SCHEME(MAP_SCHEME), .N_NEURON(N_NEURON)) u_sa (
    .sa_hi(sa_hi),
    .sa_lo(sa_lo),
    .ps   (ps)
  );

  initial assert (N_COL % cols_per_weight(MAP_SCHEME) == 0)
    else $error("adcless_crossbar: N_COL must hold whole weights");

endmodule
