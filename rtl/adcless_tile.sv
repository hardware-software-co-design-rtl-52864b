// ADC-less IMC tile for spiking neural networks (top level).
//
// A tile evaluates one slice of an SNN layer over a whole input sequence,
// one time step per clock.  It holds:
//  - the tile buffer: the binary input spikes of up to T_MAX time steps,
//    N_IN = N_PE*N_XB*XBAR spikes per step, written by the host;
//  - N_PE processing elements, each with a PE buffer, N_XB ADC-less
//    crossbars and an accumulation of their partial sums; PE p receives
//    input spikes [p*N_XB*XBAR +: N_XB*XBAR];
//  - the tile's PS accumulation, adding the PE sums per output neuron;
//  - N_NEURON digital LIF modules, one per output neuron (N_COL/8 with the
//    column-pair weight mapping, N_COL/4 with the row-pair one);
//  - the output buffer: the output spikes of every time step, read by the
//    host through the IAND spike-element-wise merge used at the end of a
//    residual block.
//
// Operation: program the weights (prog_*), write the input spikes of every
// time step into the tile buffer (in_wr_*), then pulse start with cfg_vth,
// cfg_leak (lambda = 2^-cfg_leak) and cfg_steps.  The start clears every
// LIF membrane potential.  The controller reads one time step per clock from
// the tile buffer; each step flows through the pipeline
//   tile buffer read (1) -> PE (4) -> tile PS accumulation (1) -> LIF (1)
// and its N_NEURON output spikes are written into the output buffer at
// address t.  done pulses for one clock once the last step is written: it
// is high after the (cfg_steps + 8)-th clock edge counted from the edge that
// samples start (cfg_steps reads plus a 7-clock pipeline plus the start
// edge).  Read the result with out_rd_en/out_rd_addr;
// with out_sew_bypass=0 the returned spikes are out_skip & ~y.
//
// Follows the published design: the Tile-PE-crossbar hierarchy of Fig. 4
// (tile buffer, PEs, PS accumulation, LIF modules, output buffer; PE buffer,
// ADC-less crossbars, accumulation), LIF at tile level, one time step per
// clock, 4-bit weights on 1-bit cells, 12-bit potential and threshold.
// Own choices: N_PE=4 and N_XB=15 (the counts drawn in Fig. 4), all
// crossbars of a tile sharing the same output neurons, XBAR=64 of the
// evaluated 32/64/128, the column-pair mapping as default, T_MAX=20 (the
// longest evaluated sequence), the host ports, the controller and the
// pipeline registers.
module adcless_tile
  import adcless_pkg::*;
#(
  parameter int unsigned N_PE          = 4,
  parameter int unsigned N_XB          = 15,
  parameter int unsigned XBAR          = 64,
  parameter map_scheme_e MAP_SCHEME    = MAP_COLPAIR,
  parameter int unsigned N_COL         = XBAR,
  parameter int unsigned T_MAX         = 20,
  parameter reset_mode_e RESET_MODE    = RESET_SOFT,
  localparam int unsigned N_NEURON     = N_COL / cols_per_weight(MAP_SCHEME),
  localparam int unsigned N_IN         = N_PE * N_XB * XBAR,
  localparam int unsigned ROWS         = XBAR * rows_per_input(MAP_SCHEME),
  localparam int unsigned RA_W         = $clog2(ROWS),
  localparam int unsigned XA_W         = (N_XB > 1) ? $clog2(N_XB) : 1,
  localparam int unsigned PA_W         = (N_PE > 1) ? $clog2(N_PE) : 1,
  localparam int unsigned TA_W         = (T_MAX > 1) ? $clog2(T_MAX) : 1,
  localparam int unsigned PE_W         = PS_XB_W + $clog2(N_XB) + 1,
  localparam int unsigned TILE_W       = PE_W + $clog2(N_PE) + 1
) (
  input  logic                      clk,
  input  logic                      rst,
  // weight programming
  input  logic                      prog_en,
  input  logic [PA_W-1:0]           prog_pe,
  input  logic [XA_W-1:0]           prog_xb,
  input  logic [RA_W-1:0]           prog_row,
  input  logic [N_COL-1:0]          prog_data,
  // tile buffer write (input spikes of time step in_wr_addr)
  input  logic                      in_wr_en,
  input  logic [TA_W-1:0]           in_wr_addr,
  input  logic [N_IN-1:0]           in_wr_data,
  // run control
  input  logic signed [U_W-1:0]     cfg_vth,
  input  logic [LEAK_W-1:0]         cfg_leak,
  input  logic [TA_W:0]             cfg_steps,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // output buffer read, through the IAND merge
  input  logic                      out_rd_en,
  input  logic [TA_W-1:0]           out_rd_addr,
  input  logic                      out_sew_bypass,
  input  logic [N_NEURON-1:0]       out_skip,
  output logic [N_NEURON-1:0]       out_rd_data,
  output logic                      out_rd_valid,
  // membrane potentials, for observation
  output logic signed [U_W-1:0]     umem [N_NEURON]
);

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic signed [U_W-1:0]  vth_q;
  logic [LEAK_W-1:0]      leak_q;
  logic [TA_W:0]          steps_q, rd_cnt, wr_cnt;
  logic                   lif_clear;
  logic                   tb_rd_en;

  assign tb_rd_en  = (state == S_RUN);
  assign busy      = (state != S_IDLE);
  assign lif_clear = rst || (start && state == S_IDLE);

  logic out_wr_en;

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      vth_q   <= '0;
      leak_q  <= '0;
      steps_q <= '0;
      rd_cnt  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          vth_q   <= cfg_vth;
          leak_q  <= cfg_leak;
          steps_q <= cfg_steps;
          rd_cnt  <= '0;
          state   <= (cfg_steps == 0) ? S_IDLE : S_RUN;
          done    <= (cfg_steps == 0);
        end
        S_RUN: begin
          rd_cnt <= rd_cnt + 1'b1;
          if (rd_cnt + 1'b1 == steps_q) state <= S_DRAIN;
        end
        S_DRAIN: if (out_wr_en && wr_cnt + 1'b1 == steps_q) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ tile buffer
  logic [N_IN-1:0] step_spikes;
  logic            step_valid;

  spike_buffer #(.DEPTH(T_MAX), .WIDTH(N_IN)) u_tile_buf (
    .clk     (clk),
    .rst     (rst),
    .wr_en   (in_wr_en),
    .wr_addr (in_wr_addr),
    .wr_data (in_wr_data),
    .rd_en   (tb_rd_en),
    .rd_addr (rd_cnt[TA_W-1:0]),
    .rd_data (step_spikes),
    .rd_valid(step_valid)
  );

  // -------------------------------------------------------------------- PEs
  logic                   pe_valid [N_PE];
  logic signed [PE_W-1:0] pe_ps    [N_PE][N_NEURON];

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    processing_element #(
      .N_XB(N_XB), .XBAR(XBAR), .MAP_SCHEME(MAP_SCHEME), .N_COL(N_COL)
    ) u_pe (
      .clk      (clk),
      .rst      (rst),
      .in_valid (step_valid),
      .in_spikes(step_spikes[p*N_XB*XBAR +: N_XB*XBAR]),
      .prog_en  (prog_en && prog_pe == PA_W'(p)),
      .prog_xb  (prog_xb),
      .prog_row (prog_row),
      .prog_data(prog_data),
      .out_valid(pe_valid[p]),
      .ps_out   (pe_ps[p])
    );
  end

  // ------------------------------------------------- tile PS accumulation
  logic                     acc_valid;
  logic signed [TILE_W-1:0] acc_sum [N_NEURON];

  ps_accumulator #(.N_IN(N_PE), .N_NEURON(N_NEURON), .IN_W(PE_W), .OUT_W(TILE_W)) u_tile_acc (
    .clk      (clk),
    .rst      (rst),
    .valid_in (pe_valid[0]),
    .ps_in    (pe_ps),
    .valid_out(acc_valid),
    .sum_out  (acc_sum)
  );

  // ------------------------------------------------------------ LIF modules
  logic [N_NEURON-1:0] spikes;

  for (genvar j = 0; j < N_NEURON; j++) begin : g_lif
    lif_neuron #(.IN_W(TILE_W), .RESET_MODE(RESET_MODE)) u_lif (
      .clk  (clk),
      .reset(lif_clear),
      .en   (acc_valid),
      .in_ps(acc_sum[j]),
      .vth  (vth_q),
      .leak (leak_q),
      .umem (umem[j]),
      .spike(spikes[j])
    );
  end

  // ---------------------------------------------------------- output buffer
  always_ff @(posedge clk) begin
    if (lif_clear) begin
      out_wr_en <= 1'b0;
      wr_cnt    <= '0;
    end else begin
      out_wr_en <= acc_valid;
      if (out_wr_en) wr_cnt <= wr_cnt + 1'b1;
    end
  end

  logic [N_NEURON-1:0] out_y;

  spike_buffer #(.DEPTH(T_MAX), .WIDTH(N_NEURON)) u_out_buf (
    .clk     (clk),
    .rst     (rst),
    .wr_en   (out_wr_en),
    .wr_addr (wr_cnt[TA_W-1:0]),
    .wr_data (spikes),
    .rd_en   (out_rd_en),
    .rd_addr (out_rd_addr),
    .rd_data (out_y),
    .rd_valid(out_rd_valid)
  );

  // The skip spikes and bypass select are sampled with the read so that they
  // line up with the registered read data.
  logic [N_NEURON-1:0] skip_q;
  logic                bypass_q;

  always_ff @(posedge clk) begin
    if (out_rd_en) begin
      skip_q   <= out_skip;
      bypass_q <= out_sew_bypass;
    end
  end

  sew_iand #(.WIDTH(N_NEURON)) u_sew (
    .y     (out_y),
    .x     (skip_q),
    .bypass(bypass_q),
    .g     (out_rd_data)
  );

  // ------------------------------------------------------------- assertions
  a_steps_fit : assert property (@(posedge clk) disable iff (rst)
    (start && state == S_IDLE) |-> 32'(cfg_steps) <= T_MAX);
  a_no_prog_while_busy : assert property (@(posedge clk) disable iff (rst)
    busy |-> !prog_en);
  a_pe_lockstep : assert property (@(posedge clk) disable iff (rst)
    pe_valid[N_PE-1] == pe_valid[0]);

endmodule
