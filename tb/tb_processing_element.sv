// Self-checking testbench of a processing element (PE buffer, crossbars,
// accumulation), for both weight mappings.  Random weights are programmed
// into every crossbar; then random spike vectors are streamed in back to
// back, one per clock with occasional gaps, and every ps_out is compared
// with the reference model's sum of the crossbars' partial sums.  The
// latency from in_valid to out_valid must be exactly 4 clocks.
module tb_processing_element;
  import adcless_pkg::*;
  import adcless_ref_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NX = 3, XB = 32;
  localparam int NN2 = 4, NN1 = 8;                    // neurons, col-pair / row-pair
  localparam int PW = PS_XB_W + $clog2(NX) + 1;

  logic rst, in_valid, prog_en2, prog_en1, ov2, ov1;
  logic [NX*XB-1:0] in_spikes;
  logic [1:0] prog_xb;
  logic [5:0] prog_row;
  logic [XB-1:0] prog_data;
  logic signed [PW-1:0] ps2 [NN2];
  logic signed [PW-1:0] ps1 [NN1];

  processing_element #(.N_XB(NX), .XBAR(XB), .MAP_SCHEME(MAP_COLPAIR), .N_COL(XB)) dut2 (
    .clk, .rst, .in_valid, .in_spikes, .prog_en(prog_en2), .prog_xb, .prog_row(prog_row[4:0]),
    .prog_data, .out_valid(ov2), .ps_out(ps2));
  processing_element #(.N_XB(NX), .XBAR(XB), .MAP_SCHEME(MAP_ROWPAIR), .N_COL(XB)) dut1 (
    .clk, .rst, .in_valid, .in_spikes, .prog_en(prog_en1), .prog_xb, .prog_row(prog_row),
    .prog_data, .out_valid(ov1), .ps_out(ps1));

  tile_model m2, m1;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // expected results in flight, NN entries per accepted input, and its cycle
  int exp2_q [$];
  int exp1_q [$];
  int t_in_q [$];
  int cycle = 0;
  always @(posedge clk) cycle++;

  always @(posedge clk) begin
    #2;
    if (!rst) begin
      if (ov2 !== ov1) begin checks++; failures++; $display("FAIL valid mismatch"); end
      if (ov2) begin
        int t0;
        t0 = t_in_q.pop_front();
        check("latency", cycle - t0, 4);
        for (int j = 0; j < NN2; j++) check("colpair ps", int'(ps2[j]), exp2_q.pop_front());
        for (int j = 0; j < NN1; j++) check("rowpair ps", int'(ps1[j]), exp1_q.pop_front());
      end
    end
  end

  initial begin
    bit x [];
    rst = 1; in_valid = 0; prog_en2 = 0; prog_en1 = 0; prog_xb = '0; prog_row = '0;
    prog_data = '0; in_spikes = '0;
    m2 = new(NX * XB, NN2, XB, 1'b0);
    m1 = new(NX * XB, NN1, XB, 1'b1);
    m2.random_weights(30);
    m1.random_weights(30);
    x = new[NX * XB];
    @(posedge clk); #1; rst = 0;
    for (int xb = 0; xb < NX; xb++) begin
      for (int r = 0; r < XB; r++) begin
        prog_en2 = 1; prog_xb = 2'(xb); prog_row = 6'(r); prog_data = '0;
        for (int j = 0; j < NN2; j++)
          for (int i = 0; i < 4; i++) begin
            prog_data[j*8+i]   = 1'(bitof(relu(m2.w[xb*XB+r][j]), i));
            prog_data[j*8+4+i] = 1'(bitof(relu(-m2.w[xb*XB+r][j]), i));
          end
        @(posedge clk); #1;
      end
      prog_en2 = 0;
      for (int r = 0; r < 2 * XB; r++) begin
        prog_en1 = 1; prog_xb = 2'(xb); prog_row = 6'(r); prog_data = '0;
        for (int j = 0; j < NN1; j++)
          for (int i = 0; i < 4; i++)
            prog_data[j*4+i] = 1'(bitof(relu(r % 2 == 0 ? m1.w[xb*XB+r/2][j] : -m1.w[xb*XB+r/2][j]), i));
        @(posedge clk); #1;
      end
      prog_en1 = 0;
    end
    for (int n = 0; n < 300; n++) begin
      int dens;
      dens = (n % 7 == 0) ? 0 : int'($urandom_range(2, 50));
      for (int k = 0; k < NX * XB; k++) begin
        x[k] = ($urandom_range(0, 99) < dens);
        in_spikes[k] = x[k];
      end
      in_valid = ($urandom_range(0, 4) != 0);
      if (in_valid) begin
        for (int j = 0; j < NN2; j++) exp2_q.push_back(m2.tile_sum(j, x));
        for (int j = 0; j < NN1; j++) exp1_q.push_back(m1.tile_sum(j, x));
        t_in_q.push_back(cycle);
      end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (8) @(posedge clk);
    check("all outputs seen", exp2_q.size(), 0);
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
