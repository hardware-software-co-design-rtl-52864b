// Self-checking testbench of the spike buffer (tile, PE and output buffers).
// Writes random spike vectors at random addresses, keeps a copy here, and
// checks random reads one clock after rd_en, including a read of an entry
// written in the previous cycle, rd_valid timing, and that the output holds
// while rd_en is low even when rd_addr moves.
module tb_spike_buffer;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int D = 20, W = 100;
  logic         rst, wr_en, rd_en, rd_valid;
  logic [4:0]   wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  logic [W-1:0] model [D];
  bit           known [D];

  spike_buffer #(.DEPTH(D), .WIDTH(W)) dut (.*);

  task automatic check(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    rst = 1; wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    @(posedge clk); #1; rst = 0;
    check("rd_valid after reset", W'(rd_valid), '0);
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] exp_d;
      bit do_rd;
      int ra;
      wr_en = $urandom_range(0, 1);
      wr_addr = 5'($urandom_range(0, D - 1));
      for (int b = 0; b < W; b += 32) wr_data[b +: 32] = $urandom;
      ra = (n % 5 == 0 && wr_en) ? int'(wr_addr) : int'($urandom_range(0, D - 1));
      do_rd = known[ra] && ($urandom_range(0, 2) != 0) && !(wr_en && int'(wr_addr) == ra);
      rd_en = do_rd; rd_addr = 5'(ra);
      exp_d = model[ra];
      @(posedge clk); #1;
      if (wr_en) begin model[wr_addr] = wr_data; known[wr_addr] = 1; end
      check("rd_valid", W'(rd_valid), W'(do_rd));
      if (do_rd) check("rd_data", rd_data, exp_d);
      // read-after-write on the next cycle
      if (wr_en) begin
        wr_en = 0; rd_en = 1; rd_addr = wr_addr;
        @(posedge clk); #1;
        check("read after write", rd_data, model[rd_addr]);
        exp_d = model[rd_addr];
        rd_en = 0; rd_addr = 5'((int'(rd_addr) + 1) % D);
        @(posedge clk); #1;
        check("hold", rd_data, exp_d);
      end
    end
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
