// snn_model_pkg: reference model of one core for the testbenches.
//
// core_model keeps weights, thresholds, membrane potentials and refractory
// counters of one core and computes a time step from integer arithmetic:
// V += sum of weights of spiking inputs + W_REC per recurrent spike (own
// spikes of the previous step excluding the neuron itself, and remote ones),
// then -LEAK, then fire at V >= threshold, reset to 0, REFRAC silent steps.
// Saturation is not modelled, so tests keep values small. STDP (+1 before,
// -1 after, clamped to [0,127]) is modelled by stdp().
package snn_model_pkg;
  class core_model;
    int n, np, leak, refrac, w_rec;
    int w [][];
    int thr [], v [], rc [];
    bit last_out [];
    int n_refrac = 0, n_inh_local = 0, n_inh_remote = 0, n_fire = 0;  // event counts

    function new(int n, int np, int leak, int refrac, int w_rec);
      this.n = n; this.np = np; this.leak = leak; this.refrac = refrac; this.w_rec = w_rec;
      w = new[np];
      foreach (w[i]) w[i] = new[n];
      thr = new[n]; v = new[n]; rc = new[n]; last_out = new[n];
      for (int j = 0; j < n; j++) begin thr[j] = 32767; v[j] = 0; rc[j] = 0; last_out[j] = 0; end
    endfunction

    // one time step; in_spk: forward inputs, rem: remote recurrent indices
    function void step(bit in_spk [], bit rem [], ref bit out_spk []);
      out_spk = new[n];
      for (int j = 0; j < n; j++) begin
        if (rc[j] == 0) begin
          for (int i = 0; i < np; i++) if (in_spk[i]) v[j] += w[i][j];
          for (int k = 0; k < n; k++) if (last_out[k] && k != j) begin v[j] += w_rec; n_inh_local++; end
          for (int k = 0; k < n; k++) if (rem[k]) begin v[j] += w_rec; n_inh_remote++; end
          v[j] -= leak;
        end else n_refrac++;
      end
      for (int j = 0; j < n; j++) begin
        out_spk[j] = (rc[j] == 0) && (v[j] >= thr[j]);
        if (out_spk[j]) begin n_fire++; v[j] = 0; rc[j] = refrac; end
        else if (rc[j] > 0) rc[j]--;
      end
      last_out = out_spk;
    endfunction

    function void stdp(bit post [], bit bef [], bit aft []);
      for (int j = 0; j < n; j++) if (post[j]) begin
        for (int i = 0; i < np; i++) if (bef[i]) w[i][j] = (w[i][j] >= 127) ? 127 : w[i][j] + 1;
        for (int i = 0; i < np; i++) if (aft[i]) w[i][j] = (w[i][j] <= 0) ? 0 : w[i][j] - 1;
      end
    endfunction
  endclass
endpackage
