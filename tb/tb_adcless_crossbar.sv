// Self-checking testbench of the ADC-less crossbar, both weight mappings.
//
// Random signed 4-bit weights W[k][j] in [-8,7] are programmed into a
// column-pair instance (XBAR=64, 8 neurons) and a row-pair instance
// (XBAR=32, 8 neurons, 64 physical rows).  For random spike vectors of
// varying density the partial sums are compared with an integer model of the
// published ADC-less convolution:
//   column-pair: PS_j = sum_i 2^i (h(sum_k x_k pos_i[k][j]) - h(sum_k x_k neg_i[k][j]))
//   row-pair:    PS_j = sum_i 2^i sign(sum_k x_k (pos_i[k][j] - neg_i[k][j]))
// where pos/neg_i are bit i of max(W,0) and max(-W,0).  It also checks that
// ps appears exactly one clock after sense_en and holds otherwise.
module tb_adcless_crossbar;
  import adcless_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int X2 = 64, N2 = 8;          // column-pair
  localparam int X1 = 32, N1 = 8;          // row-pair

  logic          p2_en, p1_en, sense;
  logic [5:0]    p2_row, p1_row;
  logic [63:0]   p2_data;
  logic [31:0]   p1_data;
  logic [X2-1:0] sp2;
  logic [X1-1:0] sp1;
  logic signed [PS_XB_W-1:0] ps2 [N2];
  logic signed [PS_XB_W-1:0] ps1 [N1];

  adcless_crossbar #(.XBAR(X2), .MAP_SCHEME(MAP_COLPAIR), .N_COL(64)) dut2 (
    .clk, .prog_en(p2_en), .prog_row(p2_row), .prog_data(p2_data),
    .spikes(sp2), .sense_en(sense), .ps(ps2));
  adcless_crossbar #(.XBAR(X1), .MAP_SCHEME(MAP_ROWPAIR), .N_COL(32)) dut1 (
    .clk, .prog_en(p1_en), .prog_row(p1_row), .prog_data(p1_data),
    .spikes(sp1), .sense_en(sense), .ps(ps1));

  int w2 [X2][N2];
  int w1 [X1][N1];

  function automatic int bitof(int v, int i); return (v >> i) & 1; endfunction
  function automatic int relu(int v); return v > 0 ? v : 0; endfunction

  function automatic int ref2(int j);
    int ps = 0;
    for (int i = 0; i < 4; i++) begin
      int sp = 0, sn = 0;
      for (int k = 0; k < X2; k++) if (sp2[k]) begin
        sp += bitof(relu(w2[k][j]), i);
        sn += bitof(relu(-w2[k][j]), i);
      end
      ps += (1 << i) * ((sp > 0) - (sn > 0));
    end
    return ps;
  endfunction

  function automatic int ref1(int j);
    int ps = 0;
    for (int i = 0; i < 4; i++) begin
      int s = 0;
      for (int k = 0; k < X1; k++) if (sp1[k])
        s += bitof(relu(w1[k][j]), i) - bitof(relu(-w1[k][j]), i);
      ps += (1 << i) * ((s > 0) ? 1 : (s < 0) ? -1 : 0);
    end
    return ps;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic program_weights(int sparsity);
    // column-pair: row k, column j*8+i = pos bit i, j*8+4+i = neg bit i
    for (int k = 0; k < X2; k++)
      for (int j = 0; j < N2; j++)
        w2[k][j] = ($urandom_range(0, 99) < sparsity) ? 0 : int'($urandom_range(0, 15)) - 8;
    for (int k = 0; k < X1; k++)
      for (int j = 0; j < N1; j++)
        w1[k][j] = ($urandom_range(0, 99) < sparsity) ? 0 : int'($urandom_range(0, 15)) - 8;
    sense = 1'b0; p1_en = 1'b0;
    for (int k = 0; k < X2; k++) begin
      p2_en = 1'b1; p2_row = 6'(k); p2_data = '0;
      for (int j = 0; j < N2; j++)
        for (int i = 0; i < 4; i++) begin
          p2_data[j*8+i]   = 1'(bitof(relu(w2[k][j]), i));
          p2_data[j*8+4+i] = 1'(bitof(relu(-w2[k][j]), i));
        end
      @(posedge clk); #1;
    end
    p2_en = 1'b0;
    // row-pair: row 2k = positive magnitude, row 2k+1 = negative, column j*4+i
    for (int r = 0; r < 2 * X1; r++) begin
      p1_en = 1'b1; p1_row = 6'(r); p1_data = '0;
      for (int j = 0; j < N1; j++)
        for (int i = 0; i < 4; i++)
          p1_data[j*4+i] = 1'(bitof(relu((r % 2 == 0) ? w1[r/2][j] : -w1[r/2][j]), i));
      @(posedge clk); #1;
    end
    p1_en = 1'b0;
  endtask

  int n_zero_ps = 0, n_sat_ps = 0;

  initial begin
    p2_en = 0; p1_en = 0; sense = 0; sp1 = '0; sp2 = '0; p2_row = '0; p1_row = '0;
    p2_data = '0; p1_data = '0;
    for (int round = 0; round < 6; round++) begin
      program_weights(round * 15);
      for (int v = 0; v < 60; v++) begin
        int dens;
        int e2 [N2];
        int e1 [N1];
        dens = (v % 4 == 0) ? 0 : int'($urandom_range(1, 40));
        for (int k = 0; k < X2; k++) sp2[k] = ($urandom_range(0, 99) < dens);
        for (int k = 0; k < X1; k++) sp1[k] = ($urandom_range(0, 99) < dens);
        for (int j = 0; j < N2; j++) e2[j] = ref2(j);
        for (int j = 0; j < N1; j++) e1[j] = ref1(j);
        sense = 1'b1;
        @(posedge clk); #1;
        sense = 1'b0;
        for (int j = 0; j < N2; j++) begin
          check($sformatf("colpair ps[%0d]", j), int'(ps2[j]), e2[j]);
          if (e2[j] == 0) n_zero_ps++;
          if (e2[j] == 15 || e2[j] == -15) n_sat_ps++;
        end
        for (int j = 0; j < N1; j++) check($sformatf("rowpair ps[%0d]", j), int'(ps1[j]), e1[j]);
        // hold: new spikes without sense_en must not change ps
        sp2 = ~sp2; sp1 = ~sp1;
        @(posedge clk); #1;
        for (int j = 0; j < N2; j++) check("colpair hold", int'(ps2[j]), e2[j]);
        for (int j = 0; j < N1; j++) check("rowpair hold", int'(ps1[j]), e1[j]);
      end
    end
    checks++;
    if (n_zero_ps == 0 || n_sat_ps == 0) begin
      failures++;
      $display("FAIL coverage: zero PS %0d, full-scale PS %0d", n_zero_ps, n_sat_ps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
