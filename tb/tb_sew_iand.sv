// Self-checking testbench of the IAND spike-element-wise merge.
// Checks the truth table g = (1 - y) * x of every bit exhaustively on a
// 4-bit instance and with random vectors on a 64-bit one, and the bypass.
module tb_sew_iand;
  int checks = 0, failures = 0;
  logic [3:0]  y4, x4, g4;
  logic [63:0] y, x, g;
  logic        bypass;

  sew_iand #(.WIDTH(4))  dut4 (.y(y4), .x(x4), .bypass, .g(g4));
  sew_iand #(.WIDTH(64)) dut  (.y, .x, .bypass, .g);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < 256; p++) begin
        logic [3:0] e;
        bypass = 1'(b); y4 = 4'(p); x4 = 4'(p >> 4);
        #1;
        for (int i = 0; i < 4; i++) e[i] = b ? y4[i] : 1'((1 - int'(y4[i])) * int'(x4[i]));
        check("iand 4-bit", g4, e);
      end
    for (int n = 0; n < 200; n++) begin
      bypass = 1'($urandom_range(0, 1));
      y = {$urandom, $urandom}; x = {$urandom, $urandom};
      #1;
      check("iand 64-bit", g, bypass ? y : (x & ~y));
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
