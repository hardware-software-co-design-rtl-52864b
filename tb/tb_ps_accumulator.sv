// Self-checking testbench of the partial-sum accumulator (PE accumulation
// and tile PS accumulation).  Random signed partial sums, including the
// extreme values, are added here and compared with sum_out one clock after
// valid_in; sum_out must hold while valid_in is low, and valid_out must
// follow valid_in by exactly one clock.
module tb_ps_accumulator;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 15, NN = 8, IW = 5, OW = 10;
  logic rst, valid_in, valid_out;
  logic signed [IW-1:0] ps_in [NI][NN];
  logic signed [OW-1:0] sum_out [NN];

  ps_accumulator #(.N_IN(NI), .N_NEURON(NN), .IN_W(IW), .OUT_W(OW)) dut (.*);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int last [NN];

  initial begin
    rst = 1; valid_in = 0;
    for (int i = 0; i < NI; i++) for (int j = 0; j < NN; j++) ps_in[i][j] = '0;
    @(posedge clk); #1; rst = 0;
    for (int j = 0; j < NN; j++) last[j] = 0;
    for (int n = 0; n < 500; n++) begin
      int e [NN];
      bit v;
      v = ($urandom_range(0, 3) != 0);
      for (int j = 0; j < NN; j++) e[j] = 0;
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < NN; j++) begin
          int x;
          x = (n % 50 == 0) ? 15 : (n % 50 == 1) ? -15 : int'($urandom_range(0, 30)) - 15;
          ps_in[i][j] = IW'(x);
          e[j] += x;
        end
      valid_in = v;
      @(posedge clk); #1;
      check("valid_out", int'(valid_out), int'(v));
      for (int j = 0; j < NN; j++) begin
        if (v) last[j] = e[j];
        check($sformatf("sum[%0d]", j), int'(sum_out[j]), last[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
