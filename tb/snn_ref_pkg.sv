// snn_ref_pkg: behavioural reference of one SNN layer, for the testbenches.
//
// layer_model holds one layer's integer parameters and membrane potentials
// and computes, for a given input spike frame, the output spike frame of one
// time step straight from the definitions: for each output pixel and channel
// it sums the weights of all (tap, input channel) pairs whose input spiked,
// adds the bias, integrates into the membrane potential, fires at the scaled
// threshold with reset by subtraction, and clamps to [N_min*Vth, N_max*Vth].
// Coordinates are mapped with the scatter form of each layer kind (for the
// transposed convolution: every input pixel i adds to output 2*i - P + k),
// independently of the gather form used by the hardware. It also counts how
// often a neuron fired and how often the clamp acted, so a test can tell
// which mechanisms it exercised.
package snn_ref_pkg;

  class layer_model;
    int kind, cin, cout, k, ih, iw, oh, ow;
    int w[];          // [(tap*cout + o)*cin + i]
    longint bias[];   // [o]
    longint vth, nmax, nmin;
    longint vm[];     // [(y*ow + x)*cout + o]
    int n_spike, n_clamp_hi, n_clamp_lo, n_pad_taps;

    function new(int kind_, int cin_, int cout_, int k_, int ih_, int iw_);
      kind = kind_; cin = cin_; cout = cout_; k = k_; ih = ih_; iw = iw_;
      oh = (kind == 1) ? (ih + 1) / 2 : (kind == 2) ? ih * 2 : ih;
      ow = (kind == 1) ? (iw + 1) / 2 : (kind == 2) ? iw * 2 : iw;
      w    = new[k * k * cout * cin];
      bias = new[cout];
      vm   = new[oh * ow * cout];
      foreach (w[j]) w[j] = 0;
      foreach (bias[j]) bias[j] = 0;
      foreach (vm[j]) vm[j] = 0;
      vth = 1; nmax = 1; nmin = -1;
      n_spike = 0; n_clamp_hi = 0; n_clamp_lo = 0; n_pad_taps = 0;
    endfunction

    function void clear();
      foreach (vm[j]) vm[j] = 0;
    endfunction

    // in_f[(y*iw + x)*cin + i], out_f[(y*ow + x)*cout + o]
    function void step(ref bit in_f[], ref bit out_f[]);
      longint acc[];
      int p = k / 2;
      acc = new[oh * ow * cout];
      foreach (acc[j]) acc[j] = 0;
      out_f = new[oh * ow * cout];
      if (kind == 2) begin
        // scatter: input (iy, ix) contributes to output (2*iy - p + ky, ...)
        for (int y = 0; y < ih; y++)
          for (int x = 0; x < iw; x++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int oy = 2 * y - p + ky;
                int ox = 2 * x - p + kx;
                if (oy < 0 || oy >= oh || ox < 0 || ox >= ow) continue;
                for (int i = 0; i < cin; i++)
                  if (in_f[(y * iw + x) * cin + i])
                    for (int o = 0; o < cout; o++)
                      acc[(oy * ow + ox) * cout + o] += w[((ky * k + kx) * cout + o) * cin + i];
              end
      end else begin
        int s = (kind == 1) ? 2 : 1;
        for (int oy = 0; oy < oh; oy++)
          for (int ox = 0; ox < ow; ox++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int y = s * oy + ky - p;
                int x = s * ox + kx - p;
                if (y < 0 || y >= ih || x < 0 || x >= iw) begin
                  n_pad_taps++;
                  continue;
                end
                for (int i = 0; i < cin; i++)
                  if (in_f[(y * iw + x) * cin + i])
                    for (int o = 0; o < cout; o++)
                      acc[(oy * ow + ox) * cout + o] += w[((ky * k + kx) * cout + o) * cin + i];
              end
      end
      foreach (acc[j]) begin
        longint v = vm[j] + acc[j] + bias[j % cout];
        bit f = (v >= vth);
        if (f) begin
          v -= vth;
          n_spike++;
        end
        if (v > nmax * vth) begin
          v = nmax * vth;
          n_clamp_hi++;
        end else if (v < nmin * vth) begin
          v = nmin * vth;
          n_clamp_lo++;
        end
        vm[j] = v;
        out_f[j] = f;
      end
    endfunction
  endclass

endpackage
