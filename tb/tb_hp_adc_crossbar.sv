// Testbench of the HP-ADC crossbar model (8-bit weights, 8-to-1 mux, 5-bit
// flash ADC) at its default size: 64 inputs, 64 columns, 4 neurons.
//
// Each round programs random signed 8-bit weights (random share of zeros,
// and some rounds with all-extreme weights so that many cells of a column
// are ON), then converts random spike vectors of densities from 0 to 100 %.
// The expected partial sum is computed from the weights alone:
//   PS_j = sum_i 2^i * (min(n_pos,i, 31) - min(n_neg,i, 31)),
// n_pos,i / n_neg,i = number of active inputs whose positive / negative
// weight magnitude has bit i set.  Also checked: busy for exactly 8 clocks
// and ps_valid 8 clocks after start, result held between conversions.
// Mechanisms counted (each must occur): ADC saturation at 31, negative and
// positive sums.
module tb_hp_adc_crossbar;
  import adcless_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int XB = 64, NC = 64, NB = 8, MX = 8, NN = NC / (2 * NB);

  logic          rst, prog_en, start, busy, ps_valid;
  logic [5:0]    prog_row;
  logic [NC-1:0] prog_data;
  logic [XB-1:0] spikes;
  logic signed [13:0] ps [NN];

  hp_adc_crossbar dut (.clk, .rst, .prog_en, .prog_row, .prog_data, .start,
                       .spikes, .busy, .ps_valid, .ps);

  int w [XB][NN];
  int n_sat = 0, n_neg = 0, n_pos = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int expected(int j);
    int s = 0;
    for (int i = 0; i < NB; i++) begin
      int np = 0, nn = 0;
      for (int k = 0; k < XB; k++) if (spikes[k]) begin
        if (w[k][j] > 0 && ((w[k][j] >> i) & 1) != 0) np++;
        if (w[k][j] < 0 && (((-w[k][j]) >> i) & 1) != 0) nn++;
      end
      if (np > 31 || nn > 31) n_sat++;
      s += (1 << i) * ((np > 31 ? 31 : np) - (nn > 31 ? 31 : nn));
    end
    return s;
  endfunction

  task automatic program_all();
    for (int k = 0; k < XB; k++) begin
      logic [NC-1:0] row = '0;
      for (int j = 0; j < NN; j++) begin
        int pm = w[k][j] > 0 ? w[k][j] : 0;
        int nm = w[k][j] < 0 ? -w[k][j] : 0;
        for (int i = 0; i < NB; i++) begin
          row[j * 2 * NB + i]      = 1'((pm >> i) & 1);
          row[j * 2 * NB + NB + i] = 1'((nm >> i) & 1);
        end
      end
      @(negedge clk);
      prog_en = 1; prog_row = 6'(k); prog_data = row;
    end
    @(negedge clk);
    prog_en = 0;
  endtask

  task automatic convert(int dens);
    int exp [NN];
    int cyc = 0;
    for (int k = 0; k < XB; k++) spikes[k] = ($urandom_range(0, 99) < dens);
    foreach (exp[j]) exp[j] = expected(j);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    spikes = '1;                       // the latched spikes must be used
    while (!ps_valid) begin
      check("busy while converting", int'(busy), 1);
      cyc++;
      @(negedge clk);
    end
    check("conversion clocks", cyc, MX);
    check("busy released", int'(busy), 0);
    for (int j = 0; j < NN; j++) begin
      check($sformatf("ps[%0d]", j), int'(ps[j]), exp[j]);
      if (exp[j] < 0) n_neg++;
      if (exp[j] > 0) n_pos++;
    end
    repeat (3) @(negedge clk);
    for (int j = 0; j < NN; j++) check("ps held", int'(ps[j]), exp[j]);
  endtask

  initial begin
    rst = 1; prog_en = 0; start = 0; prog_row = '0; prog_data = '0; spikes = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int r = 0; r < 12; r++) begin
      foreach (w[k, j]) begin
        if (r % 4 == 3)      w[k][j] = $urandom_range(0, 1) != 0 ? 127 : -128;
        else if ($urandom_range(0, 99) < 10 * r) w[k][j] = 0;
        else                 w[k][j] = int'($urandom_range(0, 255)) - 128;
      end
      program_all();
      for (int v = 0; v < 25; v++) convert($urandom_range(0, 100));
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL mechanism ADC saturation never happened"); end
    checks++;
    if (n_neg == 0 || n_pos == 0) begin failures++; $display("FAIL mechanism: sums of both signs needed"); end
    $display("mechanisms: ADC saturation %0d, negative PS %0d, positive PS %0d", n_sat, n_neg, n_pos);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
