// spiker_ref_pkg: bit-accurate software model of the accelerator used by
// the layer and system testbenches. It is written from the equations
// (LIF update with shift leak and subtractive or zero reset, 16-bit
// saturation, vanilla-STDP x ternary-DFA hidden updates, eta*delta*s
// output updates, t mod K gating), not from the RTL structure.
package spiker_ref_pkg;

  function automatic int sat16(int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  class layer_model;
    int n_in, n, n_out;
    bit is_out;
    int w[][];          // w[input][neuron]
    int v[];
    bit s[];
    int k[], mag[];
    bit neg[];
    int vth = 256, shift = 3, eta = 7;
    bit rst_zero = 0;
    int n_updates = 0, n_pot = 0, n_dep = 0, n_sat = 0;

    function new(int n_in_, int n_, int n_out_, bit is_out_, int c_def);
      n_in = n_in_; n = n_; n_out = n_out_; is_out = is_out_;
      w = new[n_in];
      foreach (w[j]) w[j] = new[n];
      v = new[n]; s = new[n]; k = new[n]; mag = new[n]; neg = new[n];
      for (int i = 0; i < n; i++) begin
        k[i] = i % n_out; mag[i] = c_def; neg[i] = 0;
      end
    endfunction

    function void clear();
      foreach (v[i]) begin v[i] = 0; s[i] = 0; end
    endfunction

    function void infer(bit in_s[]);
      for (int i = 0; i < n; i++) begin
        if (s[i] && rst_zero) v[i] = 0;
        else v[i] = sat16(v[i] - ((shift == 0) ? 0 : (v[i] >>> shift)) - (s[i] ? vth : 0));
        for (int j = 0; j < n_in; j++)
          if (in_s[j]) v[i] = sat16(v[i] + w[j][i]);
        s[i] = v[i] > vth;
      end
    endfunction

    function void train(bit in_s[], bit sd[], bit so[]);
      for (int j = 0; j < n_in; j++) begin
        if (!in_s[j]) continue;
        for (int i = 0; i < n; i++) begin
          int kk, c, dl, nw;
          if (is_out) begin
            kk = i; c = eta;
          end else begin
            if (!s[i]) continue;
            kk = k[i]; c = neg[i] ? -mag[i] : mag[i];
          end
          dl = int'(sd[kk]) - int'(so[kk]);
          if (dl == 0) continue;
          nw = w[j][i] + c * dl;
          if (nw != sat16(nw)) n_sat++;
          nw = sat16(nw);
          n_updates++;
          if (nw > w[j][i]) n_pot++;
          if (nw < w[j][i]) n_dep++;
          w[j][i] = nw;
        end
      end
    endfunction
  endclass

endpackage
