// Self-checking testbench of the shift-and-add stage.  Drives every SA
// pattern of one neuron exhaustively (and random ones for all neurons) and
// compares each partial sum with sum_i 2^i * value_i computed here, where a
// row-pair column is +1 (hi), -1 (lo) or 0, and a column-pair neuron is its
// positive bit group minus its negative bit group.
module tb_shift_add;
  import adcless_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] hi1, lo1;     // row-pair: 8 neurons x 4 columns
  logic [63:0] hi2, lo2;     // column-pair: 8 neurons x 8 columns
  logic signed [PS_XB_W-1:0] ps1 [8];
  logic signed [PS_XB_W-1:0] ps2 [8];

  shift_add #(.MAP_SCHEME(MAP_ROWPAIR), .N_NEURON(8)) dut1 (.sa_hi(hi1), .sa_lo(lo1), .ps(ps1));
  shift_add #(.MAP_SCHEME(MAP_COLPAIR), .N_NEURON(8)) dut2 (.sa_hi(hi2), .sa_lo(lo2), .ps(ps2));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic verify();
    #1;
    for (int j = 0; j < 8; j++) begin
      int e1 = 0, e2 = 0;
      for (int i = 0; i < 4; i++) begin
        if (hi1[j*4+i] && !lo1[j*4+i]) e1 += (1 << i);
        if (lo1[j*4+i] && !hi1[j*4+i]) e1 -= (1 << i);
        e2 += (1 << i) * (int'(hi2[j*8+i]) - int'(hi2[j*8+4+i]));
      end
      check($sformatf("rowpair ps[%0d]", j), int'(ps1[j]), e1);
      check($sformatf("colpair ps[%0d]", j), int'(ps2[j]), e2);
    end
  endtask

  initial begin
    lo2 = '0;
    for (int p = 0; p < 256; p++) begin
      // exhaustive for neuron 0; hi and lo never both set (SA outputs)
      hi1 = 32'($urandom); lo1 = 32'($urandom) & ~hi1;
      hi1[3:0] = 4'(p); lo1[3:0] = 4'(p >> 4) & ~4'(p);
      hi2 = {32'($urandom), 32'($urandom)}; hi2[7:0] = 8'(p);
      verify();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
