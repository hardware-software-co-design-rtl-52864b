// Full-size testbench of the ADC-less tile at its default parameters
// (4 PEs x 15 crossbars x 64 inputs = 3840 inputs, 8 LIF neurons,
// column-pair mapping, 20-step tile buffer).
//
// Run 1 maps one output pixel of a DVSNet 3x3 convolution with 32 input
// channels (288 inputs per output channel) for 8 of its output channels:
// the 288 weights of each channel sit on the first five crossbars of PE 0
// (five groups, the grouping of the ADC-less convolution for a 64-input
// crossbar), the other crossbars hold zero weights.  It runs 20 time steps
// of random input spikes at a rate of about 6 %, the spike rate reported
// for this network, with lambda = 1/2.
// Run 2 programs random weights everywhere and runs 10 time steps (the
// image-classification sequence length) over all 3840 inputs, lambda = 1.
// Output spikes and final membrane potentials are compared with the
// reference model; start-to-done must take steps + 8 clocks.
module tb_adcless_tile_full;
  import adcless_pkg::*;
  import adcless_ref_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NP = 4, NX = 15, XB = 64, TM = 20;
  localparam int NI = NP * NX * XB;
  localparam int NN = XB / 8;

  logic            rst, prog_en, in_wr_en, start, out_rd_en, out_sew_bypass;
  logic [1:0]      prog_pe;
  logic [3:0]      prog_xb;
  logic [5:0]      prog_row;
  logic [XB-1:0]   prog_data;
  logic [4:0]      in_wr_addr, out_rd_addr;
  logic [NI-1:0]   in_wr_data;
  logic signed [11:0] cfg_vth;
  logic [1:0]      cfg_leak;
  logic [5:0]      cfg_steps;
  logic [NN-1:0]   skip, ord;
  logic            busy, done, orv;
  logic signed [11:0] um [NN];

  adcless_tile dut (
    .clk, .rst, .prog_en, .prog_pe, .prog_xb, .prog_row, .prog_data,
    .in_wr_en, .in_wr_addr, .in_wr_data, .cfg_vth, .cfg_leak, .cfg_steps, .start,
    .busy, .done, .out_rd_en, .out_rd_addr, .out_sew_bypass,
    .out_skip(skip), .out_rd_data(ord), .out_rd_valid(orv), .umem(um));

  tile_model m;
  int n_spk_total = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic program_all();
    for (int p = 0; p < NP; p++)
      for (int xb = 0; xb < NX; xb++) begin
        int base = (p * NX + xb) * XB;
        prog_pe = 2'(p); prog_xb = 4'(xb);
        for (int r = 0; r < XB; r++) begin
          prog_en = 1; prog_row = 6'(r); prog_data = '0;
          for (int j = 0; j < NN; j++)
            for (int i = 0; i < 4; i++) begin
              prog_data[j*8+i]   = 1'(bitof(relu(m.w[base+r][j]), i));
              prog_data[j*8+4+i] = 1'(bitof(relu(-m.w[base+r][j]), i));
            end
          @(posedge clk); #1;
        end
      end
    prog_en = 0;
  endtask

  task automatic run(int steps, int n_active, int rate_pct10, int vth, int leak);
    bit x [];
    bit ex [TM][NN];
    int cyc;
    x = new[NI];
    m.clear();
    for (int t = 0; t < steps; t++) begin
      for (int k = 0; k < NI; k++) begin
        x[k] = (k < n_active) && ($urandom_range(0, 999) < rate_pct10);
        in_wr_data[k] = x[k];
      end
      in_wr_en = 1; in_wr_addr = 5'(t);
      @(posedge clk); #1;
      m.lif_step(x, vth, leak);
      for (int j = 0; j < NN; j++) ex[t][j] = m.s[j];
    end
    in_wr_en = 0;
    cfg_vth = 12'(vth); cfg_leak = 2'(leak); cfg_steps = 6'(steps);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    cyc = 1;
    while (!done && cyc < 100) begin
      @(posedge clk); #1;
      cyc++;
    end
    check("start-to-done clocks", cyc, steps + 8);
    for (int j = 0; j < NN; j++) check("final umem", int'(um[j]), m.u[j]);
    for (int t = 0; t < steps; t++) begin
      out_rd_en = 1; out_rd_addr = 5'(t); out_sew_bypass = 1; skip = '0;
      @(posedge clk); #1;
      out_rd_en = 0;
      for (int j = 0; j < NN; j++) begin
        check($sformatf("spike t=%0d j=%0d", t, j), int'(ord[j]), int'(ex[t][j]));
        n_spk_total += int'(ex[t][j]);
      end
    end
  endtask

  initial begin
    rst = 1; prog_en = 0; in_wr_en = 0; start = 0; out_rd_en = 0; out_sew_bypass = 1;
    prog_pe = '0; prog_xb = '0; prog_row = '0; prog_data = '0; in_wr_addr = '0;
    out_rd_addr = '0; in_wr_data = '0; cfg_vth = '0; cfg_leak = '0; cfg_steps = '0; skip = '0;
    m = new(NI, NN, XB, 1'b0);
    repeat (2) @(posedge clk); #1;
    rst = 0;

    // Run 1: DVSNet 3x3 conv, 32 input channels -> 288 inputs on 5 crossbars.
    foreach (m.w[k, j]) m.w[k][j] = 0;
    for (int k = 0; k < 288; k++)
      for (int j = 0; j < NN; j++) m.w[(k / 58) * XB + (k % 58)][j] = int'($urandom_range(0, 15)) - 8;
    program_all();
    run(20, NI, 60, 6, 1);
    // Run 2: random weights on every crossbar, 10 time steps.
    m.random_weights(40);
    program_all();
    run(10, NI, 60, 10, 0);

    checks++;
    if (n_spk_total == 0) begin
      failures++;
      $display("FAIL no output spike in the full-size runs");
    end
    $display("output spikes: %0d", n_spk_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
