// Self-checking testbench of the ReRAM array + sense-amplifier model.
// Programs random cell patterns, drives random wordlines and checks each
// SA bit against a count of driven ON cells computed here:
//   column-pair: sa_hi = (count > 0), sa_lo = 0
//   row-pair:    sa_hi = (count_even > count_odd), sa_lo = (count_even < count_odd)
// with wordlines driven in pairs for the row-pair instance, as its row
// decoder does.  Also checks that OFF-cell leakage alone never trips the
// column-pair SA (all rows driven, all cells OFF), that one ON cell among
// all-driven OFF cells does, and that the SA outputs hold without sense_en.
module tb_xbar_sa_array;
  import adcless_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int R = 128, C = 16;
  logic [R-1:0] row_we, wl;
  logic [C-1:0] data, hi2, lo2, hi1, lo1;
  logic         sense;
  logic [C-1:0] m [R];

  xbar_sa_array #(.ROWS(R), .COLS(C), .MAP_SCHEME(MAP_COLPAIR)) dut2 (
    .clk, .row_we, .prog_data(data), .wl, .sense_en(sense), .sa_hi(hi2), .sa_lo(lo2));
  xbar_sa_array #(.ROWS(R), .COLS(C), .MAP_SCHEME(MAP_ROWPAIR)) dut1 (
    .clk, .row_we, .prog_data(data), .wl, .sense_en(sense), .sa_hi(hi1), .sa_lo(lo1));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic prog(int density);
    sense = 0; wl = '0;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) m[r][c] = ($urandom_range(0, 99) < density);
      row_we = '0; row_we[r] = 1'b1; data = m[r];
      @(posedge clk); #1;
    end
    row_we = '0;
  endtask

  task automatic sense_and_check(bit pairs);
    logic [C-1:0] e_hi2, e_hi1, e_lo1;
    for (int c = 0; c < C; c++) begin
      int n = 0, ne = 0, no = 0;
      for (int r = 0; r < R; r++) if (wl[r] && m[r][c]) begin
        n++;
        if (r % 2 == 0) ne++; else no++;
      end
      e_hi2[c] = (n > 0);
      e_hi1[c] = (ne > no);
      e_lo1[c] = (ne < no);
    end
    sense = 1; @(posedge clk); #1; sense = 0;
    check("colpair hi", hi2, e_hi2);
    check("colpair lo", lo2, 0);
    if (pairs) begin
      check("rowpair hi", hi1, e_hi1);
      check("rowpair lo", lo1, e_lo1);
    end
    wl = ~wl; @(posedge clk); #1;
    check("hold", hi2, e_hi2);
  endtask

  initial begin
    row_we = '0; wl = '0; sense = 0; data = '0;
    for (int round = 0; round < 4; round++) begin
      prog(3 + round * 10);
      for (int v = 0; v < 50; v++) begin
        for (int k = 0; k < R / 2; k++) begin
          logic b;
          b = ($urandom_range(0, 99) < 20);
          wl[2*k] = b; wl[2*k+1] = b;
        end
        sense_and_check(1'b1);
      end
    end
    // Leakage corner: all cells OFF except column 0 row 77, every row driven.
    sense = 0;
    for (int r = 0; r < R; r++) begin
      m[r] = '0;
      if (r == 77) m[r][0] = 1'b1;
      row_we = '0; row_we[r] = 1'b1; data = m[r];
      @(posedge clk); #1;
    end
    row_we = '0;
    wl = '1;
    sense_and_check(1'b1);
    checks++;
    if (hi2 !== 16'h0001 || lo1 !== 16'h0001) begin
      failures++;
      $display("FAIL leakage corner: hi2=%h lo1=%h", hi2, lo1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
