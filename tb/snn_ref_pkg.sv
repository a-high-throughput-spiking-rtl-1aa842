// snn_ref_pkg: behavioural reference of one delayed-LIF layer for the
// testbenches.  It keeps the input spikes of the last 16 timesteps indexed by
// absolute time (not by a ring pointer) and evaluates, per timestep,
//   u <- (u * lambda) >>> 8                          leak
//   u <- sat16(u + w_ij)   for each i with s_i[t - d_ij] = 1, i ascending
//   s_j = (u > vth); u <- sat16(u - vth) on a spike  fire and reset
// which is the arithmetic the hardware is specified to perform.
package snn_ref_pkg;

  function automatic int sat16(int x);
    if (x > 32767)  return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  class lif_layer;
    int n_pre, n_post;
    int lambda, vth;
    int w [256][256];     // [i][j]
    int d [256][256];
    int u [256];
    bit hist [16][256];   // hist[t % 16][i]
    int t;
    // event counters, for coverage reports
    int n_delayed, n_fire, n_sat, n_leak;

    function new(int np, int nq);
      n_pre = np; n_post = nq; t = 0;
      n_delayed = 0; n_fire = 0; n_sat = 0; n_leak = 0;
      foreach (u[k]) u[k] = 0;
      foreach (hist[a, b]) hist[a][b] = 0;
    endfunction

    // spike history older than the first timestep reads as zero
    function bit past(int i, int dl);
      if (t - dl < 0) return 0;
      return hist[(t - dl) % 16][i];
    endfunction

    function void step(input bit in_spk [256], output bit out_spk [256]);
      for (int i = 0; i < 256; i++) hist[t % 16][i] = (i < n_pre) ? in_spk[i] : 0;
      for (int j = 0; j < n_post; j++) begin
        longint p = longint'(u[j]) * lambda;
        if (int'(p >>> 8) != u[j]) n_leak++;
        u[j] = int'(p >>> 8);
      end
      for (int i = 0; i < n_pre; i++)
        for (int j = 0; j < n_post; j++)
          if (past(i, d[i][j])) begin
            if (d[i][j] > 0) n_delayed++;
            if (sat16(u[j] + w[i][j]) != u[j] + w[i][j]) n_sat++;
            u[j] = sat16(u[j] + w[i][j]);
          end
      for (int j = 0; j < 256; j++) out_spk[j] = 0;
      for (int j = 0; j < n_post; j++)
        if (u[j] > vth) begin
          out_spk[j] = 1;
          n_fire++;
          u[j] = sat16(u[j] - vth);
        end
      t++;
    endfunction
  endclass

endpackage
