// End-to-end testbench of the ADC-less tile, at reduced size (2 PEs x 4
// crossbars x 32 inputs), with one column-pair and one row-pair tile driven
// in lockstep.
//
// Each run: (re)program random 4-bit weights, write the input spikes of
// 1..20 time steps, start with a random threshold and leak, wait for done,
// then read every time step back through the IAND merge (random bypass and
// skip spikes) and compare with the reference model (crossbar partial sums
// from the published ADC-less convolution, LIF with soft reset).  The final
// membrane potentials are compared too, and the start-to-done time must be
// cfg_steps + 8 clocks (start edge to the edge after which done is high).
//
// Mechanisms counted (each must occur): output spikes, soft resets, leak
// shifts 1 and 2, membrane saturation, full-scale and zero crossbar partial
// sums, IAND suppression of a skip spike, bypassed reads, back-to-back runs
// (membrane cleared at start), both weight mappings.
module tb_adcless_tile;
  import adcless_pkg::*;
  import adcless_ref_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NP = 2, NX = 4, XB = 32, TM = 20;
  localparam int NI = NP * NX * XB;
  localparam int NN2 = XB / 8, NN1 = XB / 4;

  logic            rst, prog_en2, prog_en1, in_wr_en, start, out_rd_en, out_sew_bypass;
  logic [0:0]      prog_pe;
  logic [1:0]      prog_xb;
  logic [5:0]      prog_row;
  logic [XB-1:0]   prog_data;
  logic [4:0]      in_wr_addr, out_rd_addr;
  logic [NI-1:0]   in_wr_data;
  logic signed [11:0] cfg_vth;
  logic [1:0]      cfg_leak;
  logic [5:0]      cfg_steps;
  logic [NN1-1:0]  skip;
  logic            busy2, done2, busy1, done1, orv2, orv1;
  logic [NN2-1:0]  ord2;
  logic [NN1-1:0]  ord1;
  logic signed [11:0] um2 [NN2];
  logic signed [11:0] um1 [NN1];

  adcless_tile #(.N_PE(NP), .N_XB(NX), .XBAR(XB), .MAP_SCHEME(MAP_COLPAIR), .T_MAX(TM)) dut2 (
    .clk, .rst, .prog_en(prog_en2), .prog_pe, .prog_xb, .prog_row(prog_row[4:0]), .prog_data,
    .in_wr_en, .in_wr_addr, .in_wr_data, .cfg_vth, .cfg_leak, .cfg_steps, .start,
    .busy(busy2), .done(done2), .out_rd_en, .out_rd_addr, .out_sew_bypass,
    .out_skip(skip[NN2-1:0]), .out_rd_data(ord2), .out_rd_valid(orv2), .umem(um2));
  adcless_tile #(.N_PE(NP), .N_XB(NX), .XBAR(XB), .MAP_SCHEME(MAP_ROWPAIR), .T_MAX(TM)) dut1 (
    .clk, .rst, .prog_en(prog_en1), .prog_pe, .prog_xb, .prog_row, .prog_data,
    .in_wr_en, .in_wr_addr, .in_wr_data, .cfg_vth, .cfg_leak, .cfg_steps, .start,
    .busy(busy1), .done(done1), .out_rd_en, .out_rd_addr, .out_sew_bypass,
    .out_skip(skip), .out_rd_data(ord1), .out_rd_valid(orv1), .umem(um1));

  tile_model m2, m1;
  int n_iand_kill = 0, n_bypass = 0, n_leak1 = 0, n_leak2 = 0, n_runs = 0;

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
        prog_pe = 1'(p); prog_xb = 2'(xb);
        for (int r = 0; r < XB; r++) begin
          prog_en2 = 1; prog_row = 6'(r); prog_data = '0;
          for (int j = 0; j < NN2; j++)
            for (int i = 0; i < 4; i++) begin
              prog_data[j*8+i]   = 1'(bitof(relu(m2.w[base+r][j]), i));
              prog_data[j*8+4+i] = 1'(bitof(relu(-m2.w[base+r][j]), i));
            end
          @(posedge clk); #1;
        end
        prog_en2 = 0;
        for (int r = 0; r < 2 * XB; r++) begin
          prog_en1 = 1; prog_row = 6'(r); prog_data = '0;
          for (int j = 0; j < NN1; j++)
            for (int i = 0; i < 4; i++)
              prog_data[j*4+i] = 1'(bitof(relu(r % 2 == 0 ? m1.w[base+r/2][j] : -m1.w[base+r/2][j]), i));
          @(posedge clk); #1;
        end
        prog_en1 = 0;
      end
  endtask

  task automatic run(int steps, int dens, int vth, int leak, bit all_on);
    bit x [];
    bit exp2 [TM][NN2];
    bit exp1 [TM][NN1];
    int t_start, t_done;
    x = new[NI];
    m2.clear(); m1.clear();
    for (int t = 0; t < steps; t++) begin
      for (int k = 0; k < NI; k++) begin
        x[k] = all_on || ($urandom_range(0, 99) < dens);
        in_wr_data[k] = x[k];
      end
      in_wr_en = 1; in_wr_addr = 5'(t);
      @(posedge clk); #1;
      m2.lif_step(x, vth, leak);
      m1.lif_step(x, vth, leak);
      for (int j = 0; j < NN2; j++) exp2[t][j] = m2.s[j];
      for (int j = 0; j < NN1; j++) exp1[t][j] = m1.s[j];
    end
    in_wr_en = 0;
    cfg_vth = 12'(vth); cfg_leak = 2'(leak); cfg_steps = 6'(steps);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    t_start = 0;
    check("busy after start", int'(busy2 && busy1), 1);
    while (!done2) begin
      @(posedge clk); #1;
      t_start++;
      if (t_start > 200) break;
    end
    check("done together", int'(done1), 1);
    check("start-to-done clocks", t_start + 1, steps + 8);
    @(posedge clk); #1;
    check("idle after done", int'(busy2 || busy1), 0);
    for (int j = 0; j < NN2; j++) check("final umem colpair", int'(um2[j]), m2.u[j]);
    for (int j = 0; j < NN1; j++) check("final umem rowpair", int'(um1[j]), m1.u[j]);
    // read back through the IAND merge
    for (int t = 0; t < steps; t++) begin
      logic [NN1-1:0] sk;
      bit byp;
      sk = NN1'($urandom);
      byp = ($urandom_range(0, 2) == 0);
      out_rd_en = 1; out_rd_addr = 5'(t); out_sew_bypass = byp; skip = sk;
      @(posedge clk); #1;
      out_rd_en = 0; skip = ~sk; out_sew_bypass = ~byp;   // must have been sampled
      check("out_rd_valid", int'(orv2 && orv1), 1);
      for (int j = 0; j < NN2; j++) begin
        int e = byp ? int'(exp2[t][j]) : int'(sk[j] && !exp2[t][j]);
        check($sformatf("colpair out t=%0d j=%0d", t, j), int'(ord2[j]), e);
        if (!byp && sk[j] && exp2[t][j]) n_iand_kill++;
      end
      for (int j = 0; j < NN1; j++) begin
        int e = byp ? int'(exp1[t][j]) : int'(sk[j] && !exp1[t][j]);
        check($sformatf("rowpair out t=%0d j=%0d", t, j), int'(ord1[j]), e);
        if (!byp && sk[j] && exp1[t][j]) n_iand_kill++;
      end
      if (byp) n_bypass++;
    end
    if (leak == 1) n_leak1++;
    if (leak == 2) n_leak2++;
    n_runs++;
  endtask

  task automatic mech(string what, int n);
    checks++;
    $display("coverage %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    rst = 1; prog_en2 = 0; prog_en1 = 0; in_wr_en = 0; start = 0; out_rd_en = 0;
    out_sew_bypass = 1; prog_pe = '0; prog_xb = '0; prog_row = '0; prog_data = '0;
    in_wr_addr = '0; out_rd_addr = '0; in_wr_data = '0; cfg_vth = '0; cfg_leak = '0;
    cfg_steps = '0; skip = '0;
    m2 = new(NI, NN2, XB, 1'b0);
    m1 = new(NI, NN1, XB, 1'b1);
    repeat (2) @(posedge clk); #1;
    rst = 0;
    for (int r = 0; r < 8; r++) begin
      m2.random_weights(20 + 10 * r);
      m1.random_weights(20 + 10 * r);
      program_all();
      for (int k = 0; k < 2; k++)
        run($urandom_range(1, TM), $urandom_range(0, 40), $urandom_range(2, 30),
            $urandom_range(0, 2), 1'b0);
    end
    // drive the membranes into negative saturation: all spikes on, W in {-8,-7}
    foreach (m2.w[k, j]) m2.w[k][j] = -8 + int'($urandom_range(0, 1));
    foreach (m1.w[k, j]) m1.w[k][j] = -8 + int'($urandom_range(0, 1));
    program_all();
    run(TM, 100, 2047, 0, 1'b1);

    mech("output spikes", m2.n_spikes + m1.n_spikes);
    mech("soft resets", m2.n_resets + m1.n_resets);
    mech("leak shift 1", n_leak1);
    mech("leak shift 2", n_leak2);
    mech("membrane saturation", m2.n_sat + m1.n_sat);
    mech("full-scale crossbar PS", m2.n_ps_full + m1.n_ps_full);
    mech("zero crossbar PS", m2.n_ps_zero + m1.n_ps_zero);
    mech("IAND suppressed skip spike", n_iand_kill);
    mech("bypassed reads", n_bypass);
    mech("back-to-back runs", n_runs - 1);
    mech("column-pair spikes", m2.n_spikes);
    mech("row-pair spikes", m1.n_spikes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
