// ising_fullsize_tb: the machine at its default size (100 logical nodes x 2
// copies = 200 p-bits, up to 51 neighbours each, 51 colours) annealing a
// dense Max-Cut instance like those of the paper: a random graph with edge
// probability 0.75 and W_ij = -J_ij = 1, copy edge W0 = 24, beta stepped
// 1/8, 2/8, ..., 1 with SWEEPS = 100 sweeps per step (4.4e4 update cycles).
//
// Checks: every p-bit state after every update cycle against the reference
// Gibbs model (8.2 million comparisons); each run lasts exactly
// SWEEPS * 51 cycles; at the end all copies agree and the merged cut is
// above the random-cut level. The best of 20 greedy local searches is
// printed for comparison only: with a copy edge strong enough to hold the
// copies together, 800 sweeps leave the sparsified graph far from the
// optimum (the paper anneals for up to 8e5 sweeps), so cut quality is not
// a pass criterion here. Plusargs +W0=, +SWEEPS= and +NPROB= (a smaller
// problem spread over the master graph) change the run.
module ising_fullsize_tb;
  import ising_pkg::*;
  import ising_ref_pkg::*;

  localparam int NL = 100, C = 2, KM = 51, NP = NL * C;
  localparam int NCOL = num_colors(NL, C);
  int W0 = 24;      // copy edge, +W0=<n> overrides
  int SWEEPS = 100; // sweeps per beta step, +SWEEPS=<n> overrides
  int NPROB = 100;  // logical problem size on the master graph, +NPROB=<n>

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [7:0] wr_pbit = 0;
  logic [5:0] wr_slot = 0;
  logic signed [9:0] wr_data = 0;
  logic load = 0, start = 0, sample = 0;
  logic [NP-1:0] load_state = 0;
  logic [31:0] num_sweeps = 0, sweep_count;
  logic busy, done, sweep_done, spins_valid;
  logic [$clog2(NCOL)-1:0] color;
  logic [NP-1:0] m;
  logic [NL-1:0] spins, conflict;
  logic [6:0] n_conflicts;

  ising_top dut (
    .clk, .rst_n, .wr_en, .wr_pbit, .wr_slot, .wr_data, .load, .load_state,
    .start, .num_sweeps, .busy, .done, .sweep_count, .sweep_done, .color, .m,
    .sample, .spins_valid, .spins, .conflict, .n_conflicts);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  gibbs_model ref_m;
  bit adj [NL][NL];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_beta(int b);
    int li, lj, v, w;
    for (int u = 0; u < NP; u++) begin
      for (int s = 0; s <= KM; s++) begin
        if (s < degree(NL, C, u)) begin
          v = neighbor(NL, C, u, s);
          li = logical_of(NL, C, u);
          lj = logical_of(NL, C, v);
          w = (li == lj) ? W0 * b : (adj[li][lj] ? -b : 0);
          ref_m.jmat[u][v] = w;
        end else w = 0;   // unused slots and the bias
        @(negedge clk);
        wr_en = 1; wr_pbit = 8'(u); wr_slot = 6'(s); wr_data = 10'(w);
      end
    end
    @(negedge clk) wr_en = 0;
  endtask

  function automatic int cut_of(logic [NL-1:0] s);
    int c = 0;
    for (int i = 0; i < NL; i++)
      for (int j = i + 1; j < NL; j++) if (adj[i][j] && s[i] != s[j]) c++;
    return c;
  endfunction

  // A problem of NPROB < 100 nodes is spread evenly over the master nodes
  // (problem node a on master node a*100/NPROB) so that its edges reach
  // both copies of each node, as they do for the full size.
  function automatic bit used_node(int i);
    for (int a = 0; a < NPROB; a++) if ((a * NL) / NPROB == i) return 1;
    return 0;
  endfunction

  // greedy local search: flip any node that increases the cut until none does
  function automatic int local_search();
    logic [NL-1:0] s;
    int gain;
    bit improved;
    s = {$urandom, $urandom, $urandom, $urandom};
    do begin
      improved = 0;
      for (int i = 0; i < NL; i++) begin
        gain = 0;
        for (int j = 0; j < NL; j++) if (adj[i][j]) gain += (s[i] == s[j]) ? 1 : -1;
        if (gain > 0) begin s[i] = ~s[i]; improved = 1; end
      end
    end while (improved);
    return cut_of(s);
  endfunction

  initial begin
    int edges, b, cycles, c_now, cut, greedy, g;
    color_map_t cm;
    void'($value$plusargs("W0=%d", W0));
    void'($value$plusargs("SWEEPS=%d", SWEEPS));
    void'($value$plusargs("NPROB=%d", NPROB));
    ref_m = new(NP);
    cm = greedy_colors(NL, C);
    for (int u = 0; u < NP; u++) begin
      ref_m.color[u] = int'(cm[u*COLOR_FIELD_W +: COLOR_FIELD_W]);
      ref_m.rng[u] = prng_seed(u);
    end
    edges = 0;
    for (int i = 0; i < NL; i++)
      for (int j = i + 1; j < NL; j++) begin
        adj[i][j] = (used_node(i) && used_node(j) && $urandom_range(0, 99) < 75);
        adj[j][i] = adj[i][j];
        edges += adj[i][j];
      end
    check(NCOL == 51, "51 colours");
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) begin load = 1; load_state = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom}; end
    @(negedge clk) load = 0;
    for (int u = 0; u < NP; u++) ref_m.m[u] = load_state[u];
    for (b = 1; b <= 8; b++) begin
      program_beta(b);
      @(negedge clk) begin start = 1; num_sweeps = SWEEPS; end
      @(negedge clk) start = 0;
      cycles = 0;
      while (busy) begin
        c_now = int'(color);
        @(posedge clk); #1;
        ref_m.step(c_now);
        cycles++;
        for (int u = 0; u < NP; u++) check(m[u] == ref_m.m[u], $sformatf("beta %0d/8 cycle %0d p-bit %0d", b, cycles, u));
        @(negedge clk);
      end
      check(cycles == SWEEPS * NCOL, $sformatf("run took %0d cycles", cycles));
    end
    @(negedge clk) sample = 1;
    @(negedge clk) sample = 0;
    check(spins_valid, "sample valid");
    cut = cut_of(spins);
    greedy = 0;
    for (int t = 0; t < 20; t++) begin g = local_search(); if (g > greedy) greedy = g; end
    $display("edges %0d, machine cut %0d (copy conflicts %0d), best of 20 local searches %0d",
             edges, cut, n_conflicts, greedy);
    check(n_conflicts == 0, "copies agree at the end of the anneal");
    check(cut * 2 > edges, "cut above the random-cut level (half the edges)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
