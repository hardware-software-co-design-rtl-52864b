// Self-checking testbench of the crossbar row decoder, both mappings.
// Compute mode: every wordline must follow the spike of its input (both rows
// of a pair for the row-pair mapping) and no row may be write-enabled.
// Program mode: exactly the addressed row is write-enabled and no wordline
// is driven.  Reference values are computed here from the row/input index.
module tb_row_decoder;
  import adcless_pkg::*;
  int checks = 0, failures = 0;

  logic [15:0] spikes;
  logic        prog_en;
  logic [4:0]  prog_row1;
  logic [3:0]  prog_row2;
  logic [31:0] wl1, we1;
  logic [15:0] wl2, we2;

  row_decoder #(.XBAR(16), .MAP_SCHEME(MAP_ROWPAIR)) dut1 (
    .spikes, .prog_en, .prog_row(prog_row1), .wl(wl1), .row_we(we1));
  row_decoder #(.XBAR(16), .MAP_SCHEME(MAP_COLPAIR)) dut2 (
    .spikes, .prog_en, .prog_row(prog_row2), .wl(wl2), .row_we(we2));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) begin
      logic [31:0] e1;
      spikes = 16'($urandom);
      prog_en = 1'b0; prog_row1 = 5'($urandom); prog_row2 = 4'($urandom);
      #1;
      for (int k = 0; k < 16; k++) begin e1[2*k] = spikes[k]; e1[2*k+1] = spikes[k]; end
      check("rowpair wl", wl1, e1);
      check("colpair wl", wl2, spikes);
      check("no write in compute", we1 | we2, 0);
      prog_en = 1'b1;
      #1;
      check("rowpair we", we1, 32'(1) << prog_row1);
      check("colpair we", we2, 16'(1) << prog_row2);
      check("no wordline in program", wl1 | wl2, 0);
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
