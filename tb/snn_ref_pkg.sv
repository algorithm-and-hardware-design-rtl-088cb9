// snn_ref_pkg: bit-exact software reference of the spiking MLP, used by the
// end-to-end testbenches. It keeps its own weights, biases and membrane
// potentials and evaluates one time step at a time with the same arithmetic
// as the hardware: bias first, then weights of active inputs in ascending
// index order, each addition saturating at POT bits, then the firing check
// v > theta, and for continuous integration v -= theta on a spike.
package snn_ref_pkg;

  class snn_model;
    int n_in, n_hid, n_out, theta, pot_w;
    bit ct;
    int sizes[4];
    int w[3][][];     // w[layer][pre][post]
    int b[3][];       // b[layer][post]
    int v[3][];
    int n_carry = 0;      // neurons that entered a step with a non-zero potential (CT)
    int n_subtract = 0;   // theta subtractions (CT)

    function new(int n_in, int n_hid, int n_out, bit ct, int theta, int pot_w);
      this.n_in = n_in; this.n_hid = n_hid; this.n_out = n_out;
      this.ct = ct; this.theta = theta; this.pot_w = pot_w;
      sizes[0] = n_in; sizes[1] = n_hid; sizes[2] = n_hid; sizes[3] = n_out;
      for (int l = 0; l < 3; l++) begin
        w[l] = new[sizes[l]];
        foreach (w[l][i]) w[l][i] = new[sizes[l+1]];
        b[l] = new[sizes[l+1]];
        v[l] = new[sizes[l+1]];
        foreach (v[l][k]) begin v[l][k] = 0; b[l][k] = 0; end
      end
    endfunction

    function int sat(longint x);
      longint hi, lo;
      hi = (longint'(1) <<< (pot_w - 1)) - 1;
      lo = -(longint'(1) <<< (pot_w - 1));
      if (x > hi) return int'(hi);
      if (x < lo) return int'(lo);
      return int'(x);
    endfunction

    // One layer, one time step. Returns the firing vector.
    function void layer_step(int l, bit first, const ref bit in_s[], ref bit out_s[]);
      out_s = new[sizes[l+1]];
      if (ct && !first) foreach (v[l][k]) if (v[l][k] != 0) n_carry++;
      foreach (v[l][k]) v[l][k] = sat(((ct && !first) ? longint'(v[l][k]) : 0) + longint'(b[l][k]));
      for (int i = 0; i < sizes[l]; i++)
        if (in_s[i])
          foreach (v[l][k]) v[l][k] = sat(longint'(v[l][k]) + longint'(w[l][i][k]));
      foreach (v[l][k]) begin
        out_s[k] = (v[l][k] > theta);
        if (ct && out_s[k]) begin v[l][k] -= theta; n_subtract++; end
      end
    endfunction

    // Whole network, one time step.
    function void step(bit first, const ref bit in_s[], ref bit out_s[], ref int n_active[3]);
      bit h1[], h2[];
      n_active[0] = 0; foreach (in_s[i]) n_active[0] += in_s[i];
      layer_step(0, first, in_s, h1);
      n_active[1] = 0; foreach (h1[i]) n_active[1] += h1[i];
      layer_step(1, first, h1, h2);
      n_active[2] = 0; foreach (h2[i]) n_active[2] += h2[i];
      layer_step(2, first, h2, out_s);
    endfunction
  endclass

endpackage
