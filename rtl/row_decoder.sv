// Row decoder and wordline drivers of one ADC-less crossbar.
//
// Compute mode: each binary input spike of the current time step drives the
// wordline(s) of its input (1-bit input DAC: spike=1 drives the row, spike=0
// leaves it at rest).  With the row-pair weight mapping every input owns two
// physical rows (even row: positive magnitude, driven to Vdd; odd row:
// negative magnitude, driven to Gnd) that are switched together by the spike
// through pass transistors, so both wordlines follow the spike.  With the
// column-pair mapping an input owns one row.
// Program mode (prog_en=1): the binary row address prog_row is decoded into
// a one-hot row write enable used to write one row of cells.
//
// Follows the published design: one wordline per input for the column-pair
// mapping, two rows per input switched by the spike for the row-pair mapping.
// Own choices: the programming port and its one-hot decode.  Purely
// combinational.
module row_decoder
  import adcless_pkg::*;
#(
  parameter int unsigned XBAR          = 64,    // logical inputs (spikes)
  parameter map_scheme_e MAP_SCHEME    = MAP_COLPAIR,
  localparam int unsigned ROWS         = XBAR * rows_per_input(MAP_SCHEME),
  localparam int unsigned RA_W         = $clog2(ROWS)
) (
  input  logic [XBAR-1:0] spikes,
  input  logic            prog_en,
  input  logic [RA_W-1:0] prog_row,
  output logic [ROWS-1:0] wl,        // wordline drive, compute mode
  output logic [ROWS-1:0] row_we     // one-hot row write enable, program mode
);

  always_comb begin
    wl     = '0;
    row_we = '0;
    if (prog_en) begin
      row_we[prog_row] = 1'b1;
    end else begin
      for (int unsigned r = 0; r < ROWS; r++)
        wl[r] = spikes[r / rows_per_input(MAP_SCHEME)];
    end
  end

endmodule
