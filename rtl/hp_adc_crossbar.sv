// Behavioural model of a conventional high-precision-ADC (HP-ADC) crossbar,
// the kind used for the first and last layers of the network, which keep
// 8-bit weights.  The ReRAM array and the flash ADCs are analog; this model
// stands in for them and is not meant as synthesizable logic of the real
// part, although it only uses synthesizable constructs.
//
// Array: XBAR rows (one per input spike) of N_COL 1-bit cells, ON = 150 and
// OFF = 1 units of current, as in the ADC-less array.  A signed 8-bit weight
// W[k][j] is split into a positive magnitude max(W,0) and a negative
// magnitude max(-W,0), bit-sliced over 2*NB_HP columns:
//   column j*2*NB_HP + i          bit i of the positive magnitude
//   column j*2*NB_HP + NB_HP + i  bit i of the negative magnitude
// so a 64-column array holds 4 neurons.
//
// Conversion: MUX bitlines share one ADC through a MUX-to-1 multiplexer, so
// the array has N_COL/MUX ADCs and needs MUX clocks per input vector.  In
// mux phase p every ADC converts the column with (column % MUX) == p.  The
// flash ADC compares the bitline current with the levels k*150 units
// (k = 1 .. 2^ADC_BITS-1); its code is therefore the number of driven ON
// cells, saturated at 2^ADC_BITS-1 = 31 (OFF-cell leakage stays below one
// ON cell while XBAR < 150, asserted below).  Each code is shifted by its
// bit position and added (positive group) or subtracted (negative group)
// into the neuron's partial sum:
//   PS_j = sum_i 2^i * (min(n_pos,i, 31) - min(n_neg,i, 31))
//
// Interface and timing: program one row per clock with prog_en/prog_row/
// prog_data.  Pulse start (while not busy) with the input spikes; the spikes
// are latched and hold the wordlines for the conversion.  busy is high for
// MUX clocks, and ps_valid rises MUX clocks after the edge that samples
// start; ps then holds until the next result.
//
// Follows the published design: 1-bit cells, Ron/Roff = 150, 8-bit weights,
// an 8-to-1 multiplexer per ADC, 5-bit flash ADCs, shift-and-add of the
// digitised bit columns, XBAR inputs per crossbar.  Own choices: the
// positive/negative column-pair layout of the 8-bit weight (the layout of
// these layers is not described), the ADC levels and saturation, one ADC
// conversion per clock, LSB-first mux order and the start/busy/ps_valid
// handshake.
module hp_adc_crossbar
  import adcless_pkg::*;
#(
  parameter int unsigned XBAR     = 64,   // inputs = rows
  parameter int unsigned N_COL    = 64,   // bitlines
  parameter int unsigned NB_HP    = 8,    // weight bits
  parameter int unsigned MUX      = 8,    // bitlines per ADC
  parameter int unsigned ADC_BITS = 5,
  localparam int unsigned N_NEURON = N_COL / (2 * NB_HP),
  localparam int unsigned RA_W     = $clog2(XBAR),
  localparam int unsigned PS_W     = ADC_BITS + NB_HP + 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   prog_en,
  input  logic [RA_W-1:0]        prog_row,
  input  logic [N_COL-1:0]       prog_data,
  input  logic                   start,
  input  logic [XBAR-1:0]        spikes,
  output logic                   busy,
  output logic                   ps_valid,
  output logic signed [PS_W-1:0] ps [N_NEURON]
);

  localparam int unsigned CUR_W = $clog2(XBAR * RON_ROFF + 1);
  localparam int unsigned PH_W  = (MUX > 1) ? $clog2(MUX) : 1;
  localparam int unsigned CODE_MAX = (1 << ADC_BITS) - 1;

  logic [XBAR-1:0]  wl, row_we, spk_q;
  logic [N_COL-1:0] cells [XBAR];
  logic [PH_W-1:0]  phase;
  logic [ADC_BITS-1:0] code [N_COL];
  logic signed [PS_W-1:0] acc [N_NEURON];
  logic signed [PS_W-1:0] acc_next [N_NEURON];

  // Same wordline drive and programming decode as the ADC-less crossbar
  // with one row per input.  The wordlines follow the latched spikes.
  row_decoder #(.XBAR(XBAR), .MAP_SCHEME(MAP_COLPAIR)) u_dec (
    .spikes(spk_q), .prog_en, .prog_row, .wl, .row_we);

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < XBAR; r++)
      if (row_we[r]) cells[r] <= prog_data;
  end

  // Bitline current and flash ADC, one generated block per bitline.
  for (genvar c = 0; c < N_COL; c++) begin : g_col
    logic [CUR_W-1:0] i_bl;
    always_comb begin
      i_bl = '0;
      for (int unsigned r = 0; r < XBAR; r++)
        if (wl[r]) i_bl = i_bl + (cells[r][c] ? CUR_W'(RON_ROFF) : CUR_W'(1));
      code[c] = '0;
      for (int unsigned k = 1; k <= CODE_MAX; k++)
        if (i_bl >= CUR_W'(k * RON_ROFF)) code[c] = ADC_BITS'(k);
    end
  end

  // Multiplexer and shift-and-add: only the columns of the current mux
  // phase reach an ADC in this clock.
  always_comb begin
    for (int unsigned j = 0; j < N_NEURON; j++) begin
      acc_next[j] = acc[j];
      for (int unsigned i = 0; i < 2 * NB_HP; i++) begin
        int unsigned c;
        c = j * 2 * NB_HP + i;
        if (PH_W'(c % MUX) == phase) begin
          if (i < NB_HP) acc_next[j] = acc_next[j] + (PS_W'(code[c]) <<< (i % NB_HP));
          else           acc_next[j] = acc_next[j] - (PS_W'(code[c]) <<< (i % NB_HP));
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy     <= 1'b0;
      ps_valid <= 1'b0;
      phase    <= '0;
      spk_q    <= '0;
      for (int unsigned j = 0; j < N_NEURON; j++) begin
        acc[j] <= '0;
        ps[j]  <= '0;
      end
    end else if (!busy) begin
      if (start) begin
        spk_q    <= spikes;
        busy     <= 1'b1;
        ps_valid <= 1'b0;
        phase    <= '0;
        for (int unsigned j = 0; j < N_NEURON; j++) acc[j] <= '0;
      end
    end else begin
      phase <= phase + 1'b1;
      for (int unsigned j = 0; j < N_NEURON; j++) acc[j] <= acc_next[j];
      if (32'(phase) == MUX - 1) begin
        busy     <= 1'b0;
        ps_valid <= 1'b1;
        phase    <= '0;
        for (int unsigned j = 0; j < N_NEURON; j++) ps[j] <= acc_next[j];
      end
    end
  end

  initial assert (XBAR < RON_ROFF && N_COL % (2 * NB_HP) == 0 && (2 * NB_HP) % MUX == 0)
    else $error("hp_adc_crossbar: XBAR must be below Ron/Roff and the columns must split into weights and mux groups");
  assert property (@(posedge clk) disable iff (rst) !(prog_en && busy))
    else $error("hp_adc_crossbar: programming during a conversion");

endmodule
