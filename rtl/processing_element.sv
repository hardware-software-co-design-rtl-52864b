// Processing element (PE): a PE buffer, N_XB ADC-less crossbars and the
// accumulation of their partial sums.
//
// A PE takes the XBAR*N_XB input spikes of one time step, gives each
// crossbar its own XBAR-spike slice (crossbar i gets spikes
// [i*XBAR +: XBAR]), and adds the crossbars' partial sums per output neuron.
// All crossbars of a PE hold weights of the same N_NEURON output neurons,
// for different inputs, as when a layer's weights are split across several
// crossbars along the input dimension.
//
// Pipeline (one time step per clock, fully pipelined):
//   k   in_valid: spikes written into the PE buffer (two-entry ping-pong)
//   k+1 PE buffer read
//   k+2 wordlines driven, SAs latch (compute-sense cycle)
//   k+3 shift-and-add, crossbar PS summed and registered
//   k+4 out_valid, ps_out
// Programming: prog_en writes prog_data into physical row prog_row of
// crossbar prog_xb.
//
// Follows the published design (Fig. 4b: PE buffer, ADC-less crossbars,
// accumulation).  Own choices: the number of crossbars per PE (fifteen, as
// drawn), the two-entry PE buffer, the pipeline registers and the sharing
// of output neurons by all crossbars of a PE.
module processing_element
  import adcless_pkg::*;
#(
  parameter int unsigned N_XB          = 15,
  parameter int unsigned XBAR          = 64,
  parameter map_scheme_e MAP_SCHEME    = MAP_COLPAIR,
  parameter int unsigned N_COL         = XBAR,
  localparam int unsigned N_NEURON     = N_COL / cols_per_weight(MAP_SCHEME),
  localparam int unsigned ROWS         = XBAR * rows_per_input(MAP_SCHEME),
  localparam int unsigned RA_W         = $clog2(ROWS),
  localparam int unsigned XA_W         = (N_XB > 1) ? $clog2(N_XB) : 1,
  localparam int unsigned PE_W         = PS_XB_W + $clog2(N_XB) + 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic [N_XB*XBAR-1:0]   in_spikes,
  input  logic                   prog_en,
  input  logic [XA_W-1:0]        prog_xb,
  input  logic [RA_W-1:0]        prog_row,
  input  logic [N_COL-1:0]       prog_data,
  output logic                   out_valid,
  output logic signed [PE_W-1:0] ps_out [N_NEURON]
);

  // PE buffer: ping-pong between two entries.
  logic             wr_slot, rd_pend, rd_slot;
  logic [N_XB*XBAR-1:0] buf_q;
  logic             buf_valid, sense_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_slot <= 1'b0;
      rd_pend <= 1'b0;
      rd_slot <= 1'b0;
    end else begin
      rd_pend <= in_valid;
      rd_slot <= wr_slot;
      if (in_valid) wr_slot <= ~wr_slot;
    end
  end

  spike_buffer #(.DEPTH(2), .WIDTH(N_XB*XBAR)) u_pe_buf (
    .clk     (clk),
    .rst     (rst),
    .wr_en   (in_valid),
    .wr_addr (wr_slot),
    .wr_data (in_spikes),
    .rd_en   (rd_pend),
    .rd_addr (rd_slot),
    .rd_data (buf_q),
    .rd_valid(buf_valid)
  );

  // Crossbars.
  logic signed [PS_XB_W-1:0] xb_ps [N_XB][N_NEURON];

  for (genvar i = 0; i < N_XB; i++) begin : g_xb
    adcless_crossbar #(.XBAR(XBAR), .MAP_SCHEME(MAP_SCHEME), .N_COL(N_COL)) u_xb (
      .clk      (clk),
      .prog_en  (prog_en && prog_xb == XA_W'(i)),
      .prog_row (prog_row),
      .prog_data(prog_data),
      .spikes   (buf_q[i*XBAR +: XBAR]),
      .sense_en (buf_valid),
      .ps       (xb_ps[i])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) sense_q <= 1'b0;
    else     sense_q <= buf_valid;
  end

  // Accumulation of the crossbars' partial sums.
  ps_accumulator #(.N_IN(N_XB), .N_NEURON(N_NEURON), .IN_W(PS_XB_W), .OUT_W(PE_W)) u_acc (
    .clk      (clk),
    .rst      (rst),
    .valid_in (sense_q),
    .ps_in    (xb_ps),
    .valid_out(out_valid),
    .sum_out  (ps_out)
  );

  // Weights are not rewritten while spikes are being sensed.
  a_no_prog_while_sensing : assert property (@(posedge clk) disable iff (rst)
    !(prog_en && buf_valid));

endmodule
