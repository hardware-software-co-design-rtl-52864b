// Behavioural model of a ReRAM memory crossbar array with one sense
// amplifier (SA) per bitline.  The cells and SAs are analog; this model
// stands in for them and is not meant as synthesizable logic of the real
// part, although it only uses synthesizable constructs.
//
// Each cell is a 1-bit ReRAM device: 1 = low-resistance (ON), 0 = high-
// resistance (OFF).  Conductances are counted in units of an OFF cell, so
// an ON cell conducts RON_ROFF (=150) units.  Only driven rows (wl=1)
// contribute current.  Once per clock with sense_en=1 the SAs latch:
//
//  MAP_COLPAIR: bitline current I = sum(wl & (ON ? 150 : 1)).  The SA
//     compares I with a reference of ROWS units, the most that OFF cells can
//     leak, so sa_hi = h(number of driven ON cells) and sa_lo = 0.
//  MAP_ROWPAIR: even rows pull the bitline to Vdd, odd rows to Gnd, and the
//     SA compares the bitline with Vdd/2: it senses the sign of
//     I_even - I_odd.  Both rows of a pair are always driven together, so the
//     OFF leakage cancels.  sa_hi = (sign > 0), sa_lo = (sign < 0); a
//     balanced bitline gives 0 on both.
//
// Programming: row_we (one-hot) writes prog_data into one row of cells.
//
// Follows the published design: 1-bit cells, Ron/Roff = 150, one SA per
// column, Vdd/2 reference for the row-pair mapping and Gnd reference for the
// column-pair mapping, h(x) and sign(x) as the two SA transfer functions.
// Own choices: the integer current model, the column-pair SA reference of
// ROWS OFF-cell units (it separates "no ON cell" from "one ON cell" as long
// as ROWS < 150, asserted below), the second output bit that lets the
// row-pair SA report a balanced bitline as 0 (the sign function used in
// training), and the one-clock compute-sense timing.
module xbar_sa_array
  import adcless_pkg::*;
#(
  parameter int unsigned ROWS       = 64,
  parameter int unsigned COLS       = 64,
  parameter map_scheme_e MAP_SCHEME = MAP_COLPAIR
) (
  input  logic            clk,
  input  logic [ROWS-1:0] row_we,
  input  logic [COLS-1:0] prog_data,
  input  logic [ROWS-1:0] wl,
  input  logic            sense_en,
  output logic [COLS-1:0] sa_hi,
  output logic [COLS-1:0] sa_lo
);

  localparam int unsigned CUR_W = $clog2(ROWS * RON_ROFF + 1) + 1;

  logic [COLS-1:0] cells [ROWS];
  logic [COLS-1:0] hi_c, lo_c;

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < ROWS; r++)
      if (row_we[r]) cells[r] <= prog_data;
  end

  // One bitline per generated block, so that each block's loop only walks
  // the rows of its own column.
  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [CUR_W-1:0] i_bl;

    always_comb begin
      i_bl = '0;
      for (int unsigned r = 0; r < ROWS; r++) begin
        if (wl[r]) begin
          if (MAP_SCHEME == MAP_ROWPAIR && r[0])
            i_bl = i_bl - (cells[r][c] ? CUR_W'(RON_ROFF) : CUR_W'(1));
          else
            i_bl = i_bl + (cells[r][c] ? CUR_W'(RON_ROFF) : CUR_W'(1));
        end
      end
    end

    if (MAP_SCHEME == MAP_ROWPAIR) begin : g_sign
      assign hi_c[c] = (i_bl > 0);
      assign lo_c[c] = (i_bl < 0);
    end else begin : g_heaviside
      assign hi_c[c] = (i_bl > CUR_W'(ROWS));
      assign lo_c[c] = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (sense_en) begin
      sa_hi <= hi_c;
      sa_lo <= lo_c;
    end
  end

  // The column-pair SA reference only separates 0 and 1 ON cells if the
  // leakage of all OFF cells stays below one ON cell.
  initial assert (MAP_SCHEME == MAP_ROWPAIR || ROWS < RON_ROFF)
    else $error("xbar_sa_array: ROWS must be below the Ron/Roff ratio");

endmodule
