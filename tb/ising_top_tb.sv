// ising_top_tb: end-to-end run of the sparse Ising machine on Max-Cut.
//
// Machine A: 6 logical nodes x 2 copies (12 p-bits). A random 6-node graph
// (edge probability 0.75, J = -1 on every edge, copy edge W0 = 2) is
// programmed through the host port and annealed with beta = 1/8, 1/4, 1/2,
// 1, 2, 4 (weights rewritten for each beta). Every cycle the p-bit states
// are compared with the reference Gibbs model; each run must take exactly
// num_sweeps * NCOLORS update cycles. The copies are merged
// after every sweep from beta = 1 on (the paper keeps the best of the last
// sweep readouts) and the best cut must equal the brute-force Max-Cut.
// Machine B: 4 nodes x 3 copies, for majority voting.
//
// Mechanisms counted (each must occur): weight writes, state load, runs
// ended by done, a zero-sweep run, a start ignored while busy, cycles in
// which several p-bits update in parallel, copy conflicts settled by coin
// flip, agreeing copies, majority votes that overrule a copy.
module ising_top_tb;
  import ising_pkg::*;
  import ising_ref_pkg::*;

  localparam int NL = 6, C = 2, KM = 4, NP = NL * C;
  localparam int NCOL = num_colors(NL, C);
  localparam int W0 = 2;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [3:0] wr_pbit = 0;
  logic [2:0] wr_slot = 0;
  logic signed [9:0] wr_data = 0;
  logic load = 0, start = 0, sample = 0;
  logic [NP-1:0] load_state = 0;
  logic [31:0] num_sweeps = 0, sweep_count;
  logic busy, done, sweep_done, spins_valid;
  logic [$clog2(NCOL)-1:0] color;
  logic [NP-1:0] m;
  logic [NL-1:0] spins, conflict;
  logic [2:0] n_conflicts;

  ising_top #(.N_LOGICAL(NL), .COPIES(C), .K_MAX(KM)) dut (
    .clk, .rst_n, .wr_en, .wr_pbit, .wr_slot, .wr_data, .load, .load_state,
    .start, .num_sweeps, .busy, .done, .sweep_count, .sweep_done, .color, .m,
    .sample, .spins_valid, .spins, .conflict, .n_conflicts);

  // machine B: three copies
  logic [11:0] b_load_state = 0;
  logic b_load = 0;
  logic [11:0] b_m;
  logic [3:0] b_spins, b_conflict;
  logic [2:0] b_nconf;
  logic b_valid, b_busy, b_done, b_sd;
  logic [31:0] b_sc;
  logic [$clog2(num_colors(4, 3))-1:0] b_color;
  ising_top #(.N_LOGICAL(4), .COPIES(3), .K_MAX(3)) dut_b (
    .clk, .rst_n, .wr_en(1'b0), .wr_pbit('0), .wr_slot('0), .wr_data('0),
    .load(b_load), .load_state(b_load_state), .start(1'b0), .num_sweeps('0),
    .busy(b_busy), .done(b_done), .sweep_count(b_sc), .sweep_done(b_sd), .color(b_color),
    .m(b_m), .sample, .spins_valid(b_valid), .spins(b_spins), .conflict(b_conflict),
    .n_conflicts(b_nconf));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_writes = 0, n_loads = 0, n_done = 0, n_zero_runs = 0, n_ignored_start = 0;
  int n_parallel = 0, n_coin = 0, n_agree = 0, n_majority = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  gibbs_model ref_m;
  bit adj [NL][NL];

  task automatic write(int u, int s, int val);
    @(negedge clk);
    wr_en = 1; wr_pbit = 4'(u); wr_slot = 3'(s); wr_data = 10'(val);
    @(negedge clk);
    wr_en = 0;
    n_writes++;
  endtask

  // program beta*J for beta = b/8: J = -1 on graph edges, W0 on copy edges
  task automatic program_beta(int b);
    int li, lj, v, w;
    for (int u = 0; u < NP; u++) begin
      for (int s = 0; s < degree(NL, C, u); s++) begin
        v = neighbor(NL, C, u, s);
        li = logical_of(NL, C, u);
        lj = logical_of(NL, C, v);
        w = (li == lj) ? W0 * b : (adj[li][lj] ? -b : 0);
        ref_m.jmat[u][v] = w;
        write(u, s, w);
      end
      ref_m.h[u] = 0;
      write(u, KM, 0);
    end
  endtask

  function automatic int cut_of(logic [NL-1:0] s);
    int c = 0;
    for (int i = 0; i < NL; i++)
      for (int j = i + 1; j < NL; j++) if (adj[i][j] && s[i] != s[j]) c++;
    return c;
  endfunction

  // run S sweeps, comparing with the reference every cycle. With track set,
  // the state at the end of every sweep is sampled (sample raised in the
  // cycle after sweep_done) and the best conflict-free cut is returned.
  task automatic run_sweeps(int s, bit poke, bit track, output int best);
    int cycles, par, c_now;
    bit pending, sd;
    logic [NP-1:0] snap;
    best = -1;
    pending = 0;
    @(negedge clk) begin start = 1; num_sweeps = s; end
    @(negedge clk) start = 0;
    cycles = 0;
    while (busy) begin
      c_now = int'(color);
      par = 0;
      for (int u = 0; u < NP; u++) par += (ref_m.color[u] == c_now);
      if (par > 1) n_parallel++;
      if (poke && cycles == 2) begin start = 1; num_sweeps = 1000; end
      sample = pending;
      if (pending) snap = m;
      sd = sweep_done;
      @(posedge clk); #1;
      ref_m.step(c_now);
      cycles++;
      for (int u = 0; u < NP; u++) check(m[u] == ref_m.m[u], $sformatf("cycle %0d p-bit %0d", cycles, u));
      @(negedge clk);
      if (poke && cycles == 3) begin
        start = 0;
        n_ignored_start++;
      end
      if (sample) begin
        sample = 0;
        check(spins_valid, "valid after sample");
        tally(best, snap);
      end
      pending = track && sd;
    end
    if (pending) begin
      snap = m;
      sample = 1;
      @(negedge clk) sample = 0;
      tally(best, snap);
    end
    check(cycles == s * NCOL, $sformatf("run of %0d sweeps took %0d cycles", s, cycles));
    check(int'(sweep_count) == s, "sweep count");
  endtask

  task automatic tally(inout int best, input logic [NP-1:0] snap);
    int c;
    for (int i = 0; i < NL; i++) begin
      bit a, b;
      a = snap[phys_index(NL, C, i, 0)];
      b = snap[phys_index(NL, C, i, 1)];
      check(conflict[i] == (a != b), "conflict flag");
      if (a != b) n_coin++;
      else begin
        n_agree++;
        check(spins[i] == a, "agreeing copies give the spin");
      end
    end
    if (n_conflicts == 0) begin
      c = cut_of(spins);
      if (c > best) best = c;
    end
  endtask

  always @(posedge clk) if (done) n_done++;

  initial begin
    int opt, best, b, edges, opt_seen;
    color_map_t cm;
    ref_m = new(NP);
    cm = greedy_colors(NL, C);
    for (int u = 0; u < NP; u++) begin
      ref_m.color[u] = int'(cm[u*COLOR_FIELD_W +: COLOR_FIELD_W]);
      ref_m.rng[u] = prng_seed(u);
    end
    edges = 0;
    for (int i = 0; i < NL; i++)
      for (int j = i + 1; j < NL; j++) begin
        adj[i][j] = ($urandom_range(0, 99) < 75);
        adj[j][i] = adj[i][j];
        edges += adj[i][j];
      end
    opt = 0;
    for (int s = 0; s < (1 << NL); s++) if (cut_of(NL'(s)) > opt) opt = cut_of(NL'(s));
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initial state
    @(negedge clk) begin load = 1; load_state = NP'($urandom); end
    @(negedge clk) load = 0;
    n_loads++;
    for (int u = 0; u < NP; u++) ref_m.m[u] = load_state[u];
    check(m == load_state, "state load");
    // zero-sweep run
    @(negedge clk) begin start = 1; num_sweeps = 0; end
    @(negedge clk) start = 0;
    check(done && !busy && m == load_state, "zero-sweep run");
    n_zero_runs++;
    // anneal
    b = 1;
    opt_seen = -1;
    for (int step = 0; step < 6; step++) begin
      program_beta(b);
      run_sweeps(step >= 3 ? 50 : 10, step == 1, step >= 3, best);
      if (best > opt_seen) opt_seen = best;
      b = b * 2;
    end
    best = opt_seen;
    $display("edges %0d, max-cut %0d, best cut found %0d", edges, opt, best);
    check(best == opt, "anneal reaches the Max-Cut");
    // a sample with forced copy disagreement: coin flip
    for (int k = 0; k < 40; k++) begin
      @(negedge clk) begin load = 1; load_state = NP'($urandom); end
      @(negedge clk) begin load = 0; sample = 1; end
      @(negedge clk) sample = 0;
      check(spins_valid, "valid after sample");
      tally(best, load_state);
    end
    // machine B: majority of three
    for (int k = 0; k < 30; k++) begin
      int votes;
      @(negedge clk) begin b_load = 1; b_load_state = 12'($urandom); end
      @(negedge clk) begin b_load = 0; sample = 1; end
      @(negedge clk) sample = 0;
      for (int i = 0; i < 4; i++) begin
        votes = 0;
        for (int c = 0; c < 3; c++) votes += b_m[phys_index(4, 3, i, c)];
        check(b_spins[i] == (votes >= 2), "majority of three");
        if (votes == 1 || votes == 2) n_majority++;
      end
    end
    $display("writes %0d loads %0d done %0d zero-runs %0d ignored-starts %0d parallel-cycles %0d",
             n_writes, n_loads, n_done, n_zero_runs, n_ignored_start, n_parallel);
    $display("coin-flips %0d agreements %0d majority-votes %0d", n_coin, n_agree, n_majority);
    check(n_writes > 0, "mechanism: weight writes");
    check(n_loads > 0, "mechanism: state load");
    check(n_done >= 7, "mechanism: runs ended by done");
    check(n_zero_runs > 0, "mechanism: zero-sweep run");
    check(n_ignored_start > 0, "mechanism: start ignored while busy");
    check(n_parallel > 0, "mechanism: parallel colour updates");
    check(n_coin > 0, "mechanism: coin flip on copy conflict");
    check(n_agree > 0, "mechanism: agreeing copies");
    check(n_majority > 0, "mechanism: majority vote");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
