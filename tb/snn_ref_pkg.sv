// snn_ref_pkg: reference model of the accelerator for the testbenches.
//
// The model works on absolute spike times, not on the hardware's token
// stream, so it checks the differential-time machinery independently. A spike
// list is a queue of (time, index) sorted by time and then by index, which is
// the order in which the hardware delivers simultaneous spikes.
//   lif_layer : one LIF layer, beta = 0.5 (shift), theta = 2^W_FRAC, reset by
//               subtraction, weights of all spikes of one time step summed
//               (saturating, in index order) before the threshold, threshold
//               only at times with an input spike.
//   code_to_events : one input train in the b-bit code -> absolute spikes.
package snn_ref_pkg;
  import snn_pkg::*;

  typedef struct {
    int t;
    int idx;
  } ev_t;

  typedef ev_t ev_q_t[$];

  function automatic int sat_p(int v);
    int hi = (1 << (P_W - 1)) - 1;
    int lo = -(1 << (P_W - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Sign-extended value of a W_W-bit weight.
  function automatic int wsext(int w);
    int v = w & ((1 << W_W) - 1);
    if (v >= (1 << (W_W - 1))) v -= (1 << W_W);
    return v;
  endfunction

  // w[i*n_out + n] is the weight from synapse i to neuron n.
  function automatic ev_q_t lif_layer(const ref int w[], input int n_in, input int n_out,
                                      input ev_q_t in_ev);
    ev_q_t out_ev;
    int p[] = new[n_out];
    int theta = 1 << W_FRAC;
    int k = 0;
    int t_prev = 0;
    foreach (p[n]) p[n] = 0;
    while (k < in_ev.size()) begin
      int t = in_ev[k].t;
      int sh = t - t_prev;
      for (int n = 0; n < n_out; n++) begin
        if (sh >= 31) p[n] = (p[n] < 0) ? -1 : 0;
        else          p[n] = p[n] >>> sh;
      end
      while (k < in_ev.size() && in_ev[k].t == t) begin
        for (int n = 0; n < n_out; n++)
          p[n] = sat_p(p[n] + w[in_ev[k].idx * n_out + n]);
        k++;
      end
      for (int n = 0; n < n_out; n++) begin
        if (p[n] >= theta) begin
          out_ev.push_back('{t: t, idx: n});
          p[n] -= theta;
        end
      end
      t_prev = t;
    end
    return out_ev;
  endfunction

  // Merge spike lists of several trains: sort by time, then by train index.
  function automatic ev_q_t sort_events(input ev_q_t ev);
    ev_q_t r = ev;
    r.sort(x) with (x.t * 65536 + x.idx);
    return r;
  endfunction

endpackage
