// snn_ref_pkg: behavioural reference of the spiking network, for the testbenches.
//
// A plain integer model of what the accelerator computes, written from the
// neuron equations rather than from the RTL structure:
//   per time step and per layer (all layers from the previous step's spikes),
//     leak   : IF none; LIF1 V -= V>>>b; LIF2 V -= V>>>b, then V += I, I -= I>>>a
//     inputs : if any feed-forward spike, add W_ff[i][n] for every spiking input i
//              in index order (into I for LIF2, into V otherwise); then the same
//              for the previous-step spikes of the layer itself if recurrent
//     fire   : spike = V > Vth; subtractive reset V -= Vth, fixed reset V = Vreset
//   every addition saturates at the two's-complement limits of BW bits;
//   the output counters add the last layer's spikes of the previous step.
// The class also counts how often each mechanism happened (empty steps,
// feedback loops, saturations, spikes, resets), so a testbench can check that a
// stimulus exercised them.
//
// The equations (IF, first- and second-order LIF, subtractive or fixed reset,
// decay by shifts) are those of the neuron models; saturation to the neuron
// width, the one-step delay between layers and the order leak-integrate-fire
// within a step are this design's choices, modelled here on purpose so that
// the hardware can be compared count for count.
package snn_ref_pkg;

  class snn_ref;
    int n_layers;
    int sizes[];          // n_layers+1 entries
    bit recurrent[];
    int model;            // 0 IF, 1 LIF1, 2 LIF2
    int reset_mode;       // 0 subtractive, 1 fixed
    int bw;
    int vth[];
    int vreset[];
    int ashift, bshift;
    int wff[][][];        // [layer][input][neuron]
    int wfb[][][];        // [layer][source neuron][neuron]
    int v[][], i_syn[][];
    bit s[][];            // spikes per layer output
    int count[];
    // mechanism counters
    int n_empty_ff, n_active_ff, n_fb_loops, n_fb_skipped, n_sat, n_spikes, n_steps;

    function new(int n_layers, int sizes[], bit recurrent[], int model, int reset_mode,
                 int bw, int vth[], int vreset[], int ashift, int bshift);
      this.n_layers = n_layers;
      this.sizes = sizes;
      this.recurrent = recurrent;
      this.model = model;
      this.reset_mode = reset_mode;
      this.bw = bw;
      this.vth = vth;
      this.vreset = vreset;
      this.ashift = ashift;
      this.bshift = bshift;
      wff = new[n_layers];
      wfb = new[n_layers];
      v = new[n_layers];
      i_syn = new[n_layers];
      s = new[n_layers];
      for (int l = 0; l < n_layers; l++) begin
        wff[l] = new[sizes[l]];
        foreach (wff[l][r]) wff[l][r] = new[sizes[l+1]];
        wfb[l] = new[sizes[l+1]];
        foreach (wfb[l][r]) wfb[l][r] = new[sizes[l+1]];
        v[l] = new[sizes[l+1]];
        i_syn[l] = new[sizes[l+1]];
        s[l] = new[sizes[l+1]];
      end
      count = new[sizes[n_layers]];
      clear();
    endfunction

    function void clear();
      for (int l = 0; l < n_layers; l++)
        for (int n = 0; n < sizes[l+1]; n++) begin
          v[l][n] = 0; i_syn[l][n] = 0; s[l][n] = 0;
        end
      foreach (count[k]) count[k] = 0;
    endfunction

    function int sat(int x);
      int mx = (1 <<< (bw-1)) - 1;
      int mn = -(1 <<< (bw-1));
      if (x > mx) begin n_sat++; return mx; end
      if (x < mn) begin n_sat++; return mn; end
      return x;
    endfunction

    function int asr(int x, int k);
      return x >>> k;
    endfunction

    // One time step of the whole network with input spike vector x.
    function void step(bit x[]);
      bit prev[][];
      prev = new[n_layers];
      for (int l = 0; l < n_layers; l++) prev[l] = s[l];
      n_steps++;
      // output interface sees the last layer's spikes from the previous step
      foreach (count[k]) if (prev[n_layers-1][k]) count[k]++;
      for (int l = 0; l < n_layers; l++) begin
        bit inp[];
        bit any_ff, any_fb;
        inp = (l == 0) ? x : prev[l-1];
        any_ff = 0; any_fb = 0;
        foreach (inp[i]) any_ff |= inp[i];
        if (recurrent[l]) foreach (prev[l][j]) any_fb |= prev[l][j];
        if (any_ff) n_active_ff++; else n_empty_ff++;
        if (recurrent[l]) begin if (any_fb) n_fb_loops++; else n_fb_skipped++; end
        for (int n = 0; n < sizes[l+1]; n++) begin
          // leak
          if (model == 1) v[l][n] = sat(v[l][n] - asr(v[l][n], bshift));
          if (model == 2) begin
            v[l][n] = sat(v[l][n] - asr(v[l][n], bshift));
            v[l][n] = sat(v[l][n] + i_syn[l][n]);
            i_syn[l][n] = sat(i_syn[l][n] - asr(i_syn[l][n], ashift));
          end
          // inputs
          if (any_ff)
            foreach (inp[i]) if (inp[i]) begin
              if (model == 2) i_syn[l][n] = sat(i_syn[l][n] + wff[l][i][n]);
              else            v[l][n]     = sat(v[l][n] + wff[l][i][n]);
            end
          if (any_fb)
            foreach (prev[l][j]) if (prev[l][j]) begin
              if (model == 2) i_syn[l][n] = sat(i_syn[l][n] + wfb[l][j][n]);
              else            v[l][n]     = sat(v[l][n] + wfb[l][j][n]);
            end
          // fire
          if (v[l][n] > vth[l]) begin
            s[l][n] = 1;
            n_spikes++;
            if (reset_mode == 0) v[l][n] = sat(v[l][n] - vth[l]);
            else                 v[l][n] = vreset[l];
          end else begin
            s[l][n] = 0;
          end
        end
      end
    endfunction
  endclass

endpackage
