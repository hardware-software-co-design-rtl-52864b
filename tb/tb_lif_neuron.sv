// Self-checking testbench of the digital LIF neuron.
//
// 1. Replays the nine-step reference sequence of the published waveform
//    (vth = 45, lambda = 1): inputs 20,15,30,20,15,-10,70,2,2 must give the
//    membrane potentials 20,35,65,40,55,0,70,27,29 with spikes on 65, 55, 70.
// 2. Runs random sequences with random thresholds, leak shifts 0..2 and
//    occasional en=0 cycles against an integer model of the LIF equations,
//    for a soft-reset and a hard-reset instance, including saturation.
// 3. Checks the one-clock latency: umem changes on the edge after en.
module tb_lif_neuron;
  import adcless_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                     reset, en;
  logic signed [11:0]       in_ps;
  logic signed [U_W-1:0]    vth;
  logic [LEAK_W-1:0]        leak;
  logic signed [U_W-1:0]    umem_s, umem_h;
  logic                     spike_s, spike_h;

  lif_neuron #(.IN_W(12), .RESET_MODE(RESET_SOFT)) dut_s (
    .clk, .reset, .en, .in_ps, .vth, .leak, .umem(umem_s), .spike(spike_s));
  lif_neuron #(.IN_W(12), .RESET_MODE(RESET_HARD)) dut_h (
    .clk, .reset, .en, .in_ps, .vth, .leak, .umem(umem_h), .spike(spike_h));

  // Integer reference model.
  int ref_u_s, ref_u_h;
  bit ref_s_s, ref_s_h;

  function automatic int sat12(int v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v;
  endfunction

  function automatic int asr(int v, int n);
    // floor(v / 2^n)
    int d = 1 << n;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step(int x, bit do_en);
    in_ps = 12'(x);
    en    = do_en;
    @(posedge clk); #1;
    if (do_en) begin
      int b;
      b = ref_s_s ? ref_u_s - int'(vth) : ref_u_s;
      ref_u_s = sat12(asr(b, int'(leak)) + x);
      ref_s_s = (ref_u_s >= int'(vth));
      b = ref_s_h ? 0 : ref_u_h;
      ref_u_h = sat12(asr(b, int'(leak)) + x);
      ref_s_h = (ref_u_h >= int'(vth));
    end
    check("umem soft", int'(umem_s), ref_u_s);
    check("spike soft", int'(spike_s), int'(ref_s_s));
    check("umem hard", int'(umem_h), ref_u_h);
    check("spike hard", int'(spike_h), int'(ref_s_h));
  endtask

  task automatic clear();
    reset = 1'b1; en = 1'b0; in_ps = '0;
    @(posedge clk); #1;
    reset = 1'b0;
    ref_u_s = 0; ref_u_h = 0; ref_s_s = 0; ref_s_h = 0;
    check("cleared", int'(umem_s) + int'(spike_s), 0);
  endtask

  // Published waveform (vth = 45, lambda = 1).
  int fig_in   [9] = '{20, 15, 30, 20, 15, -10, 70, 2, 2};
  int fig_umem [9] = '{20, 35, 65, 40, 55, 0, 70, 27, 29};
  bit fig_spk  [9] = '{0, 0, 1, 0, 1, 0, 1, 0, 0};

  initial begin
    vth = 12'sd45; leak = 2'd0;
    clear();
    for (int t = 0; t < 9; t++) begin
      in_ps = 12'(fig_in[t]); en = 1'b1;
      @(posedge clk); #1;
      check($sformatf("waveform umem[%0d]", t), int'(umem_s), fig_umem[t]);
      check($sformatf("waveform spike[%0d]", t), int'(spike_s), int'(fig_spk[t]));
    end

    // Latency: with en low the state holds.
    en = 1'b0; in_ps = 12'sd100;
    @(posedge clk); #1;
    check("hold when en=0", int'(umem_s), 29);

    // Random sequences.
    for (int s = 0; s < 200; s++) begin
      vth  = 12'($urandom_range(1, 600));
      leak = 2'($urandom_range(0, 2));
      clear();
      for (int t = 0; t < 20; t++) begin
        int x;
        x = int'($urandom_range(0, 400)) - 150;
        if (s % 10 == 0) x = int'($urandom_range(0, 2047)) - 600;  // drive into saturation
        step(x, ($urandom_range(0, 7) != 0));
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
