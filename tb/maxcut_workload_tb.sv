// maxcut_workload_tb: dense Max-Cut on a sparsified graph, the workload of
// the W0 study. A random 20-node graph (edge probability 0.75, W_ij = 1)
// runs on a machine built for 20 logical nodes x 2 copies (40 p-bits, at
// most 11 neighbours each). For several copy-edge strengths W0 the machine
// anneals linearly in beta from 0.125 to 1 in steps of 0.125, with SWEEPS
// sweeps per step. During the last beta step the copies are merged after
// every sweep and the best cut among readouts whose copies all agree is kept.
// The optimum comes from an exhaustive Gray-code search over all 2^19
// assignments.
//
// Checks: the best approximation ratio over the W0 values reaches 0.95,
// every run takes SWEEPS x NCOLORS cycles, and a weak copy edge (W0 = 1)
// leaves more copy conflicts than a strong one (W0 = 12).
module maxcut_workload_tb;
  import ising_pkg::*;

  localparam int NL = 20, C = 2, KM = max_degree(NL, C), NP = NL * C;
  localparam int NCOL = num_colors(NL, C);
  localparam int SWEEPS = 2000;
  localparam int NW = 10;
  localparam int W0S [NW] = '{1, 2, 3, 4, 5, 6, 7, 8, 10, 12};

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [$clog2(NP)-1:0] wr_pbit = 0;
  logic [$clog2(KM+1)-1:0] wr_slot = 0;
  logic signed [9:0] wr_data = 0;
  logic load = 0, start = 0, sample = 0;
  logic [NP-1:0] load_state = 0;
  logic [31:0] num_sweeps = 0, sweep_count;
  logic busy, done, sweep_done, spins_valid;
  logic [$clog2(NCOL)-1:0] color;
  logic [NP-1:0] m;
  logic [NL-1:0] spins, conflict;
  logic [$clog2(NL+1)-1:0] n_conflicts;

  ising_top #(.N_LOGICAL(NL), .COPIES(C), .K_MAX(KM)) dut (
    .clk, .rst_n, .wr_en, .wr_pbit, .wr_slot, .wr_data, .load, .load_state,
    .start, .num_sweeps, .busy, .done, .sweep_count, .sweep_done, .color, .m,
    .sample, .spins_valid, .spins, .conflict, .n_conflicts);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit adj [NL][NL];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cut_of(logic [NL-1:0] s);
    int c = 0;
    for (int i = 0; i < NL; i++)
      for (int j = i + 1; j < NL; j++) if (adj[i][j] && s[i] != s[j]) c++;
    return c;
  endfunction

  // exhaustive search with node NL-1 fixed (cut symmetry), Gray-code order
  function automatic int max_cut();
    logic [NL-1:0] s;
    int c, best, k, d;
    s = '0; c = 0; best = 0;
    for (int g = 1; g < (1 << (NL - 1)); g++) begin
      k = 0;
      while (((g >> k) & 1) == 0) k++;
      d = 0;
      for (int j = 0; j < NL; j++)
        if (adj[k][j]) d += (s[k] == s[j]) ? 1 : -1;
      s[k] = ~s[k];
      c += d;
      if (c > best) best = c;
    end
    return best;
  endfunction

  task automatic program_beta(int b, int w0);
    int li, lj, v, w;
    for (int u = 0; u < NP; u++)
      for (int s = 0; s <= KM; s++) begin
        w = 0;
        if (s < degree(NL, C, u)) begin
          v = neighbor(NL, C, u, s);
          li = logical_of(NL, C, u);
          lj = logical_of(NL, C, v);
          w = (li == lj) ? w0 * b : (adj[li][lj] ? -b : 0);
        end
        @(negedge clk);
        wr_en = 1; wr_pbit = $bits(wr_pbit)'(u); wr_slot = $bits(wr_slot)'(s); wr_data = 10'(w);
      end
    @(negedge clk) wr_en = 0;
  endtask

  initial begin
    int opt, best, cyc, conf_sum [NW], best_ratio_x1000, edges;
    bit pending;
    edges = 0;
    for (int i = 0; i < NL; i++)
      for (int j = i + 1; j < NL; j++) begin
        adj[i][j] = ($urandom_range(0, 99) < 75);
        adj[j][i] = adj[i][j];
        edges += adj[i][j];
      end
    opt = max_cut();
    repeat (2) @(negedge clk);
    rst_n = 1;
    best_ratio_x1000 = 0;
    for (int wi = 0; wi < NW; wi++) begin
      @(negedge clk) begin load = 1; load_state = NP'({$urandom, $urandom}); end
      @(negedge clk) load = 0;
      best = 0;
      conf_sum[wi] = 0;
      for (int b = 1; b <= 8; b++) begin
        program_beta(b, W0S[wi]);
        @(negedge clk) begin start = 1; num_sweeps = SWEEPS; end
        @(negedge clk) start = 0;
        cyc = 0;
        pending = 0;
        while (busy || pending) begin
          sample = pending && (b == 8);
          pending = busy && sweep_done;
          if (busy) cyc++;
          @(negedge clk);
          if (sample) begin
            conf_sum[wi] += int'(n_conflicts);
            if (n_conflicts == 0 && cut_of(spins) > best) best = cut_of(spins);
          end
        end
        sample = 0;
        check(cyc == SWEEPS * NCOL, $sformatf("run took %0d cycles", cyc));
      end
      $display("W0 = %0d: best cut %0d of %0d (ratio %0.3f), mean copy conflicts %0.2f",
               W0S[wi], best, opt, real'(best) / real'(opt), real'(conf_sum[wi]) / SWEEPS);
      if (best * 1000 / opt > best_ratio_x1000) best_ratio_x1000 = best * 1000 / opt;
    end
    $display("edges %0d, Max-Cut %0d, best approximation ratio %0.3f", edges, opt, best_ratio_x1000 / 1000.0);
    check(best_ratio_x1000 >= 950, "approximation ratio at least 0.95 for the best W0");
    check(conf_sum[0] > conf_sum[NW-1], "weak copy edge leaves more conflicts than a strong one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
