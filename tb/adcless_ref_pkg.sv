// Reference model used by the testbenches of the PE and the tile.
//
// Written from the published equations, independently of the RTL:
//  - crossbar partial sums (ADC-less convolution of one crossbar):
//      column-pair: PS_j = sum_i 2^i (h(sum_k x_k pos_i[k][j]) - h(sum_k x_k neg_i[k][j]))
//      row-pair:    PS_j = sum_i 2^i sign(sum_k x_k (pos_i[k][j] - neg_i[k][j]))
//    with pos/neg_i = bit i of max(W,0) / max(-W,0), W in [-8,7];
//  - the LIF step: U' = clamp12(((S ? U - Vth : U) >> n) + in), S' = U' >= Vth.
package adcless_ref_pkg;

  function automatic int bitof(int v, int i);
    return (v >> i) & 1;
  endfunction

  function automatic int relu(int v);
    return (v > 0) ? v : 0;
  endfunction

  function automatic int clamp12(int v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v;
  endfunction

  function automatic int floor_shift(int v, int n);
    int d = 1 << n;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  class tile_model;
    int n_in, n_neuron, xbar;
    bit rowpair;
    int w [][];          // [input][neuron]
    int u [];
    bit s [];
    // coverage of mechanisms
    int n_spikes, n_resets, n_sat, n_ps_full, n_ps_zero;

    function new(int n_in, int n_neuron, int xbar, bit rowpair);
      this.n_in = n_in; this.n_neuron = n_neuron; this.xbar = xbar; this.rowpair = rowpair;
      w = new[n_in];
      foreach (w[k]) w[k] = new[n_neuron];
      u = new[n_neuron];
      s = new[n_neuron];
    endfunction

    function void random_weights(int zero_pct);
      foreach (w[k, j]) w[k][j] = ($urandom_range(0, 99) < zero_pct) ? 0 : int'($urandom_range(0, 15)) - 8;
    endfunction

    // PS of crossbar xb (inputs xb*xbar .. xb*xbar+xbar-1) for neuron j.
    function int xbar_ps(int xb, int j, const ref bit x []);
      int ps = 0;
      for (int i = 0; i < 4; i++) begin
        int sp = 0, sn = 0;
        for (int k = xb * xbar; k < (xb + 1) * xbar; k++) if (x[k]) begin
          sp += bitof(relu(w[k][j]), i);
          sn += bitof(relu(-w[k][j]), i);
        end
        if (rowpair) ps += (1 << i) * ((sp > sn) ? 1 : (sp < sn) ? -1 : 0);
        else         ps += (1 << i) * (int'(sp > 0) - int'(sn > 0));
      end
      if (ps == 7 || ps == -15) n_ps_full++;   // W in [-8,7]: PS in [-15,7]
      if (ps == 0) n_ps_zero++;
      return ps;
    endfunction

    function int tile_sum(int j, const ref bit x []);
      int acc = 0;
      for (int xb = 0; xb < n_in / xbar; xb++) acc += xbar_ps(xb, j, x);
      return acc;
    endfunction

    function void clear();
      foreach (u[j]) begin u[j] = 0; s[j] = 0; end
    endfunction

    function void lif_step(const ref bit x [], input int vth, input int leak);
      for (int j = 0; j < n_neuron; j++) begin
        int b, v, in;
        in = tile_sum(j, x);
        if (s[j]) n_resets++;
        b = s[j] ? u[j] - vth : u[j];
        v = floor_shift(b, leak) + in;
        if (v != clamp12(v)) n_sat++;
        u[j] = clamp12(v);
        s[j] = (u[j] >= vth);
        if (s[j]) n_spikes++;
      end
    endfunction
  endclass

endpackage
