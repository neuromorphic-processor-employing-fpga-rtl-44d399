// snn_ref_pkg: cycle-level reference model of the SNN array for testbenches.
//
// The model applies the fixed-leak LIF equations to N neurons, one call of
// step() per clock edge, with the same two-stage timing as the hardware: the
// weighted input count of cycle k is used by the soma in cycle k+1. It also
// reproduces the one-cycle sampling of the input impulse vector. Potentials
// saturate at 2^pot_w - 1 and never go below zero.
package snn_ref_pkg;

  class snn_ref;
    int unsigned n, leak, pot_max, refr;
    bit          cl[][];      // cl[src][dst]
    int unsigned thr[], w[];
    bit          imp[];
    // state
    int unsigned v[], r[], syn[];
    bit          y[], ext[];
    // event counters
    int unsigned n_fire = 0, n_refr_block = 0, n_leak = 0;

    function new(int unsigned n_, int unsigned leak_, int unsigned pot_w);
      n = n_; leak = leak_; pot_max = (1 << pot_w) - 1; refr = 0;
      cl = new[n]; foreach (cl[i]) cl[i] = new[n];
      thr = new[n]; w = new[n]; imp = new[n];
      v = new[n]; r = new[n]; syn = new[n]; y = new[n]; ext = new[n];
      reset();
    endfunction

    function void reset();
      for (int i = 0; i < n; i++) begin
        v[i] = 0; r[i] = 0; syn[i] = 0; y[i] = 0; ext[i] = 0;
      end
    endfunction

    // One clock edge. ivalid: impulse vector valid in the cycle before the edge.
    function void step(bit ivalid);
      int unsigned nsyn[] = new[n];
      bit          ny[]   = new[n];
      int unsigned nv[]   = new[n];
      int unsigned nr[]   = new[n];
      for (int m = 0; m < n; m++) begin
        int unsigned cnt = ext[m];
        int          vt;
        for (int s = 0; s < n; s++) if (cl[s][m] && y[s]) cnt++;
        nsyn[m] = w[m] * cnt;
        vt = int'(v[m]) + int'(syn[m]);
        if (v[m] != 0) begin
          if (leak != 0) n_leak++;
          vt = vt - int'(leak);
          if (vt < 0) vt = 0;
        end
        ny[m] = (vt >= int'(thr[m])) && (r[m] == 0);
        if (ny[m]) n_fire++;
        if (vt >= int'(thr[m]) && r[m] != 0) n_refr_block++;
        if (ny[m] || r[m] > 0) nv[m] = 0;
        else nv[m] = (vt > int'(pot_max)) ? pot_max : vt;
        if (ny[m]) nr[m] = refr;
        else nr[m] = (r[m] > 0) ? r[m] - 1 : 0;
      end
      for (int m = 0; m < n; m++) begin
        syn[m] = nsyn[m]; y[m] = ny[m]; v[m] = nv[m]; r[m] = nr[m];
        ext[m] = ivalid ? imp[m] : 1'b0;
      end
    endfunction
    // The configuration as the byte stream the register bank expects:
    // connection-list rows, thresholds, weights, impulse vector; vectors LSB
    // first, ceil(n/8) bytes each.
    function void to_bytes(ref logic [7:0] q[$]);
      int unsigned nb = (n + 7) / 8;
      for (int s = 0; s < n; s++)
        for (int b = 0; b < nb; b++) begin
          logic [7:0] x = '0;
          for (int k = 0; k < 8; k++) if (8 * b + k < n) x[k] = cl[s][8 * b + k];
          q.push_back(x);
        end
      for (int i = 0; i < n; i++) q.push_back(8'(thr[i]));
      for (int i = 0; i < n; i++) q.push_back(8'(w[i]));
      for (int b = 0; b < nb; b++) begin
        logic [7:0] x = '0;
        for (int k = 0; k < 8; k++) if (8 * b + k < n) x[k] = imp[8 * b + k];
        q.push_back(x);
      end
    endfunction

    function void clear_config();
      for (int i = 0; i < n; i++) begin
        for (int j = 0; j < n; j++) cl[i][j] = 0;
        thr[i] = 255; w[i] = 0; imp[i] = 0;
      end
    endfunction
  endclass

  // Ten synthetic 8x8 digit templates, ~50% of pixels set, none contained in
  // another (so a template matches its own class neuron only).
  function automatic void make_templates(ref logic [63:0] t[10]);
    bit ok;
    do begin
      for (int d = 0; d < 10; d++) t[d] = {$urandom, $urandom};
      ok = 1;
      for (int a = 0; a < 10; a++)
        for (int b = 0; b < 10; b++)
          if (a != b && (t[a] & t[b]) == t[a]) ok = 0;
    end while (!ok);
  endfunction

  // Two-layer MNIST network on a 74-neuron array: input neurons 0..63 (one
  // per pixel, threshold 1, weight 1), output neurons 64..73 (digit 0..9).
  // Pixel p is connected to digit d where template d has the pixel set; the
  // digit neuron's threshold is the number of such pixels, so it fires only
  // when every pixel of its template is lit.
  function automatic void mnist_config(snn_ref m, ref logic [63:0] t[10], input logic [63:0] image);
    m.clear_config();
    for (int p = 0; p < 64; p++) begin
      m.thr[p] = 1; m.w[p] = 1; m.imp[p] = image[p];
      for (int d = 0; d < 10; d++) m.cl[p][64 + d] = t[d][p];
    end
    for (int d = 0; d < 10; d++) begin
      m.thr[64 + d] = $countones(t[d]); m.w[64 + d] = 1;
    end
  endfunction

endpackage
