// neighbor_adder: the local field of one p-bit in a sparse network.
//
// Computes I = h + sum_j J_j * m_j over the K fixed neighbour slots of a
// p-bit (Algorithm 1, line 4). Because m_j is +1 or -1 the products are just
// +J_j or -J_j, and, as drawn in the paper's sparse p-bit, the terms are added
// by a balanced binary adder tree of depth ceil(log2(K+1)), so its size and
// delay do not depend on the network size. Slots whose bit in VALID is 0 are
// not wired in the master graph and contribute nothing.
//
// Operands are signed fixed point with the weights' format; SUM_W must hold
// (K+1) times the largest weight (16 bits for K = 51 and 10-bit weights).
// Purely combinational.
module neighbor_adder #(
  parameter int         K       = 51,
  parameter int         W_W     = ising_pkg::WEIGHT_W,
  parameter int         SUM_W   = 16,
  parameter logic [K-1:0] VALID = '1
) (
  input  logic signed [W_W-1:0]   w [K],
  input  logic [K-1:0]            m,
  input  logic signed [W_W-1:0]   h,
  output logic signed [SUM_W-1:0] sum
);

  localparam int LEAVES = K + 1;
  localparam int LEVELS = $clog2(LEAVES);
  localparam int WIDTH  = 1 << LEVELS;

  typedef logic signed [SUM_W-1:0] sum_t;

  sum_t tree [LEVELS+1][WIDTH];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int n = 0; n < WIDTH; n++) tree[l][n] = '0;
    // leaves: bias, then +J or -J per wired slot
    tree[0][0] = sum_t'(h);
    for (int s = 0; s < K; s++)
      if (VALID[s]) tree[0][s+1] = m[s] ? sum_t'(w[s]) : -sum_t'(w[s]);
    // pairwise reduction
    for (int l = 1; l <= LEVELS; l++)
      for (int n = 0; n < (WIDTH >> l); n++)
        tree[l][n] = tree[l-1][2*n] + tree[l-1][2*n+1];
  end

  assign sum = tree[LEVELS][0];

  initial assert ((1 << (SUM_W - 1)) >= LEAVES * (1 << (W_W - 1)))
    else $error("neighbor_adder: SUM_W too narrow for K terms");

endmodule
