// ising_pkg: constants, number formats and the elaboration-time graph
// compiler shared by the sparse p-bit Ising machine.
//
// Number formats (follow the paper): weights and biases are 10-bit signed
// fixed point, 1 sign, 6 integer and 3 fraction bits, and already hold the
// inverse temperature (beta*J, beta*h). A spin m = +1 is stored as bit 1 and
// m = -1 as bit 0. The tanh table and the random numbers are signed
// fractions of TANH_W bits (this design's choice, 12 bits).
//
// Master graph. The functions below build, while the design elaborates, the
// fixed sparse graph that copy-node sparsification makes of an all-to-all
// graph of N logical nodes with C copies per node:
//   * physical p-bit of logical node i, copy c:  i for c = 0, and
//     N + i*(C-1) + (c-1) for c > 0 (copies numbered after the originals,
//     those of one node next to each other, as in the paper's algorithm);
//   * copies of one node form a chain i - i' - i'' ... joined by copy edges;
//   * the N-1 logical edges of node i, taken in order of the other node's
//     index, are split into C contiguous, nearly equal chunks, chunk c going
//     to copy c. The paper moves "k-1 edges" per copy without saying which;
//     the even split is this design's choice and gives the degrees the paper
//     reports (51, 35 and 27 for 2, 3 and 4 copies of 100 nodes).
// Slot order inside a p-bit: copy edge to the previous copy (if any), copy
// edge to the next copy (if any), then the logical edges in neighbour order.
//
// Colouring. A greedy colouring in p-bit index order gives each p-bit a
// colour that differs from all its neighbours; p-bits of one colour are
// independent and update together. The paper colours the graph but does not
// say how; greedy colouring is this design's choice.
package ising_pkg;

  localparam int WEIGHT_W    = 10;  // s6.3 weights (paper, Methods)
  localparam int WEIGHT_FRAC = 3;
  localparam int TANH_W      = 12;  // LUT output and random number width
  localparam int LUT_DEPTH   = 128; // input clamped to [-8, +8) in 1/8 steps
  localparam int COLOR_FIELD_W = 8; // colour field width in a colour map
  localparam int MAX_PBITS   = 1024;

  // ---------------------------------------------------------------------
  // Topology
  // ---------------------------------------------------------------------
  function automatic int phys_index(int n, int c_num, int i, int c);
    return (c == 0) ? i : n + i * (c_num - 1) + (c - 1);
  endfunction

  function automatic int logical_of(int n, int c_num, int u);
    return (u < n) ? u : (u - n) / (c_num - 1);
  endfunction

  function automatic int copy_of(int n, int c_num, int u);
    return (u < n) ? 0 : (u - n) % (c_num - 1) + 1;
  endfunction

  // First position (in node i's ordered list of N-1 partners) of chunk c.
  function automatic int chunk_lo(int n, int c_num, int c);
    return (c * (n - 1) + c_num - 1) / c_num;
  endfunction

  // Copy of node i that holds the logical edge to node j.
  function automatic int chunk_of(int n, int c_num, int i, int j);
    int p;
    p = (j < i) ? j : j - 1;
    return (p * c_num) / (n - 1);
  endfunction

  function automatic int copy_slots(int c_num, int c);
    return ((c > 0) ? 1 : 0) + ((c < c_num - 1) ? 1 : 0);
  endfunction

  function automatic int degree(int n, int c_num, int u);
    int c;
    c = copy_of(n, c_num, u);
    return copy_slots(c_num, c) + chunk_lo(n, c_num, c + 1) - chunk_lo(n, c_num, c);
  endfunction

  function automatic int max_degree(int n, int c_num);
    int d;
    d = 0;
    for (int c = 0; c < c_num; c++)
      if (degree(n, c_num, phys_index(n, c_num, 0, c)) > d)
        d = degree(n, c_num, phys_index(n, c_num, 0, c));
    return d;
  endfunction

  // Physical neighbour in slot s of p-bit u, or -1 for an unused slot.
  function automatic int neighbor(int n, int c_num, int u, int s);
    int i, c, p, j;
    i  = logical_of(n, c_num, u);
    c  = copy_of(n, c_num, u);
    if (s >= degree(n, c_num, u)) return -1;
    if (c > 0) begin
      if (s == 0) return phys_index(n, c_num, i, c - 1);
      s = s - 1;
    end
    if (c < c_num - 1) begin
      if (s == 0) return phys_index(n, c_num, i, c + 1);
      s = s - 1;
    end
    p = chunk_lo(n, c_num, c) + s;
    j = (p < i) ? p : p + 1;
    return phys_index(n, c_num, j, chunk_of(n, c_num, j, i));
  endfunction

  // Slot of p-bit u that holds neighbour v, or -1 when they are not joined.
  function automatic int slot_of(int n, int c_num, int u, int v);
    for (int s = 0; s < degree(n, c_num, u); s++)
      if (neighbor(n, c_num, u, s) == v) return s;
    return -1;
  endfunction

  // ---------------------------------------------------------------------
  // Greedy colouring, packed COLOR_FIELD_W bits per p-bit
  // ---------------------------------------------------------------------
  typedef logic [MAX_PBITS*COLOR_FIELD_W-1:0] color_map_t;

  function automatic color_map_t greedy_colors(int n, int c_num);
    color_map_t  r;
    int          col  [MAX_PBITS];
    bit          used [256];
    int          v;
    r = '0;
    for (int u = 0; u < n * c_num; u++) begin
      for (int k = 0; k < 256; k++) used[k] = 1'b0;
      for (int s = 0; s < degree(n, c_num, u); s++) begin
        v = neighbor(n, c_num, u, s);
        if (v < u) used[col[v]] = 1'b1;
      end
      col[u] = 0;
      while (used[col[u]]) col[u]++;
      r[u*COLOR_FIELD_W +: COLOR_FIELD_W] = COLOR_FIELD_W'(col[u]);
    end
    return r;
  endfunction

  function automatic int num_colors(int n, int c_num);
    color_map_t m;
    int         k;
    m = greedy_colors(n, c_num);
    k = 0;
    for (int u = 0; u < n * c_num; u++)
      if (int'(m[u*COLOR_FIELD_W +: COLOR_FIELD_W]) + 1 > k) k = int'(m[u*COLOR_FIELD_W +: COLOR_FIELD_W]) + 1;
    return k;
  endfunction

  // ---------------------------------------------------------------------
  // Activation table: entry a holds tanh((a - 64)/8) scaled by 2^(TANH_W-1)
  // and rounded, saturated to the largest positive code.
  // ---------------------------------------------------------------------
  function automatic logic signed [TANH_W-1:0] tanh_entry(int a);
    real x, t, q;
    int  qi;
    x  = real'(a - LUT_DEPTH / 2) / real'(1 << WEIGHT_FRAC);
    t  = 1.0 - 2.0 / ($exp(2.0 * x) + 1.0);
    q  = t * real'(1 << (TANH_W - 1));
    qi = (q >= 0.0) ? $rtoi(q + 0.5) : -$rtoi(0.5 - q);
    if (qi > (1 << (TANH_W - 1)) - 1) qi = (1 << (TANH_W - 1)) - 1;
    if (qi < -((1 << (TANH_W - 1)) - 1)) qi = -((1 << (TANH_W - 1)) - 1);
    return TANH_W'(qi);
  endfunction

  // Default PRNG seed of p-bit u: distinct and never zero.
  function automatic logic [31:0] prng_seed(int u);
    logic [31:0] s;
    s = 32'h9E37_79B9 ^ (32'(u + 1) * 32'h0101_0F3D);
    return (s == 32'd0) ? 32'd1 : s;
  endfunction

endpackage
