// ttfs_ref_pkg: reference model of a TTFS layer with dendritic delays, for the
// testbenches.
//
// It evaluates the neuron equations directly, timestep by timestep, with no
// notion of queues, handshakes or memories: the slope of neuron j is the
// saturated sum of the weights of all inputs that have spiked up to and
// including timestep t, the membrane adds the slope once per timestep
// (saturating to QV bits), the neuron crosses at the first t with V >= V_th
// and fires at t_cross + delay if that is before T, otherwise never (-1).
// Arrays are flat: weight of input i to neuron j is w[i*J + j].
package ttfs_ref_pkg;

  function automatic int sat(input int v, input int qv);
    int hi, lo;
    hi = (1 << (qv - 1)) - 1;
    lo = -(1 << (qv - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // Sign-extend a QS-bit two's complement field.
  function automatic int sx(input int v, input int qs);
    v = v & ((1 << qs) - 1);
    return (v >= (1 << (qs - 1))) ? v - (1 << qs) : v;
  endfunction

  // in_t[i]: spike time of input i or -1. Returns out_t[j] likewise.
  function automatic void layer(input int in_t[], input int w[], input int d[],
                                input int I, input int J, input int vth,
                                input int qv, input int T, ref int out_t[]);
    int slope[], v[], tc[];
    slope = new[J];
    v     = new[J];
    tc    = new[J];
    out_t = new[J];
    foreach (tc[j]) begin
      slope[j] = 0; v[j] = 0; tc[j] = -1; out_t[j] = -1;
    end
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < I; i++)
        if (in_t[i] == t)
          for (int j = 0; j < J; j++) slope[j] = sat(slope[j] + w[i*J + j], qv);
      for (int j = 0; j < J; j++) begin
        v[j] = sat(v[j] + slope[j], qv);
        if (tc[j] < 0 && v[j] >= vth) tc[j] = t;
        if (tc[j] >= 0 && out_t[j] < 0 && t == tc[j] + d[j]) out_t[j] = t;
      end
    end
  endfunction

endpackage
