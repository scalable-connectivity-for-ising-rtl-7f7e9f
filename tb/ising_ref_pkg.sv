// ising_ref_pkg: reference model used by the network-level testbenches.
//
// An independent, untimed model of a coloured Gibbs sampler on an explicit
// dense weight matrix: fields are plain sums over all p-bits, tanh is
// computed from exp in floating point, and every p-bit has its own xorshift32
// stream. The testbenches program the hardware from the same matrix and
// compare the states cycle by cycle. Also: Max-Cut helpers.
package ising_ref_pkg;

  localparam int TW = 12;

  function automatic logic [31:0] xorshift(logic [31:0] s);
    s = s ^ (s << 13);
    s = s ^ (s >> 17);
    s = s ^ (s << 5);
    return s;
  endfunction

  // round(tanh(I/8) * 2^(TW-1)) with I clamped to [-64, 63], saturated
  function automatic int tanh_q(int i);
    real x, t, q;
    int  r;
    if (i < -64) i = -64;
    if (i > 63)  i = 63;
    x = real'(i) / 8.0;
    t = 1.0 - 2.0 / ($exp(2.0 * x) + 1.0);
    q = t * real'(1 << (TW - 1));
    r = (q >= 0.0) ? $rtoi(q + 0.5) : -$rtoi(0.5 - q);
    if (r >  (1 << (TW - 1)) - 1) r =  (1 << (TW - 1)) - 1;
    if (r < -((1 << (TW - 1)) - 1)) r = -((1 << (TW - 1)) - 1);
    return r;
  endfunction

  function automatic int signed_r(logic [31:0] s);
    logic signed [TW-1:0] v;
    v = s[31 -: TW];
    return int'(v);
  endfunction

  class gibbs_model;
    int          n;
    int          jmat [][];   // jmat[u][v], 0 where not joined
    int          h    [];
    int          color[];
    bit          m    [];
    logic [31:0] rng  [];

    function new(int n_pbits);
      n = n_pbits;
      jmat = new[n];
      foreach (jmat[u]) begin
        jmat[u] = new[n];
        foreach (jmat[u][v]) jmat[u][v] = 0;
      end
      h = new[n]; color = new[n]; m = new[n]; rng = new[n];
      foreach (h[u]) begin h[u] = 0; color[u] = 0; m[u] = 0; rng[u] = 0; end
    endfunction

    function automatic int field(int u);
      int s;
      s = h[u];
      for (int v = 0; v < n; v++) if (jmat[u][v] != 0) s += m[v] ? jmat[u][v] : -jmat[u][v];
      return s;
    endfunction

    // one update cycle of colour c
    function automatic void step(int c);
      bit nm [];
      nm = new[n];
      for (int u = 0; u < n; u++) begin
        nm[u] = m[u];
        if (color[u] == c) begin
          nm[u] = tanh_q(field(u)) > signed_r(rng[u]);
          rng[u] = xorshift(rng[u]);
        end
      end
      for (int u = 0; u < n; u++) m[u] = nm[u];
    endfunction
  endclass

endpackage
