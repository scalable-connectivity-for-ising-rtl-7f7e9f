// full_adder_workload_tb: the sparsified full adder. Five spins A, B, Cin,
// S, Cout are joined all-to-all with the weights
//   A-B, A-Cin, B-Cin: -1;  A, B, Cin to S: +1;  A, B, Cin to Cout: +2;
//   S-Cout: -2;  no biases,
// whose eight ground states are the rows of the full-adder truth table.
// The graph runs on a machine built for 5 logical nodes x 2 copies
// (10 p-bits, at most 3 neighbours each) at beta = 1, for three copy-edge
// strengths W0 = 1, 4 and 7.5. After a burn-in the copies are merged after
// every sweep, and the histogram of the 32 logical states is compared with
// the exact Boltzmann distribution of the 5-spin graph by the
// Kullback-Leibler divergence D(sampled || exact).
// State numbering: A is the most significant bit, Cout the least, bit = 1
// for spin +1.
//
// Checks: every run takes the expected number of cycles; at W0 = 4 the
// divergence is below 0.2 and the eight truth-table states carry more than
// 70% of the samples (81% exactly); both a weak (W0 = 1) and a rigid
// (W0 = 7.5) copy edge give a larger divergence than W0 = 4, and the weak
// one leaves more copy conflicts. A typical run gives a divergence of about
// 1.2, 0.09 and 2.3 for the three values: the optimum in the middle is
// reproduced, but the residual at W0 = 4 is larger than the 1e-2 level
// reported for the source design (tanh table resolution, coin-flip merge of
// conflicting copies, and this design's choice of which copy holds which
// edge all bear on it).
module full_adder_workload_tb;
  import ising_pkg::*;

  localparam int NL = 5, C = 2, KM = max_degree(NL, C), NP = NL * C;
  localparam int NCOL = num_colors(NL, C);
  localparam int BURN = 1000, SAMPLES = 20000;
  localparam int NW = 3;
  localparam int W0_CODES [NW] = '{8, 32, 60};  // W0 = 1, 4, 7.5 in s6.3

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
  int jmat [NL][NL];
  int hist [32], conf_now;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int state_of(logic [NL-1:0] s);
    int st = 0;
    for (int k = 0; k < NL; k++) st = (st << 1) | int'(s[k]);
    return st;
  endfunction

  function automatic bit truth_row(int st);
    int a, b, ci, sum, co;
    a = (st >> 4) & 1; b = (st >> 3) & 1; ci = (st >> 2) & 1;
    sum = (st >> 1) & 1; co = st & 1;
    return (a + b + ci) == (2 * co + sum);
  endfunction

  task automatic program_weights(int w0_code);
    int li, lj, v, w;
    for (int u = 0; u < NP; u++)
      for (int s = 0; s <= KM; s++) begin
        w = 0;
        if (s < degree(NL, C, u)) begin
          v = neighbor(NL, C, u, s);
          li = logical_of(NL, C, u);
          lj = logical_of(NL, C, v);
          w = (li == lj) ? w0_code : jmat[li][lj] * (1 << WEIGHT_FRAC);
        end
        @(negedge clk);
        wr_en = 1; wr_pbit = $bits(wr_pbit)'(u); wr_slot = $bits(wr_slot)'(s); wr_data = 10'(w);
      end
    @(negedge clk) wr_en = 0;
  endtask

  task automatic run(int sweeps, bit do_sample);
    int cyc;
    bit pending;
    @(negedge clk) begin start = 1; num_sweeps = sweeps; end
    @(negedge clk) start = 0;
    cyc = 0;
    pending = 0;
    while (busy || pending) begin
      sample = pending && do_sample;
      pending = busy && sweep_done;
      if (busy) cyc++;
      @(negedge clk);
      if (sample) begin
        hist[state_of(spins)]++;
        conf_now += int'(n_conflicts);
      end
    end
    sample = 0;
    check(cyc == sweeps * NCOL, $sformatf("run took %0d cycles", cyc));
  endtask

  initial begin
    real p_exact [32], z, e, kl [NW], p, truth_frac [NW];
    int  conf [NW], mi [NL];
    int  n_truth;
    for (int i = 0; i < NL; i++)
      for (int j = 0; j < NL; j++) jmat[i][j] = 0;
    // nodes: 0 A, 1 B, 2 Cin, 3 S, 4 Cout
    jmat[0][1] = -1; jmat[0][2] = -1; jmat[1][2] = -1;
    jmat[0][3] =  1; jmat[1][3] =  1; jmat[2][3] =  1;
    jmat[0][4] =  2; jmat[1][4] =  2; jmat[2][4] =  2;
    jmat[3][4] = -2;
    for (int i = 0; i < NL; i++)
      for (int j = 0; j < i; j++) jmat[i][j] = jmat[j][i];

    z = 0.0;
    for (int st = 0; st < 32; st++) begin
      for (int k = 0; k < NL; k++) mi[k] = (((st >> (NL - 1 - k)) & 1) != 0) ? 1 : -1;
      e = 0.0;
      for (int i = 0; i < NL; i++)
        for (int j = i + 1; j < NL; j++) e -= real'(jmat[i][j] * mi[i] * mi[j]);
      p_exact[st] = $exp(-e);
      z += p_exact[st];
    end
    for (int st = 0; st < 32; st++) p_exact[st] /= z;

    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int wi = 0; wi < NW; wi++) begin
      for (int st = 0; st < 32; st++) hist[st] = 0;
      conf_now = 0;
      @(negedge clk) begin load = 1; load_state = NP'($urandom); end
      @(negedge clk) load = 0;
      program_weights(W0_CODES[wi]);
      run(BURN, 1'b0);
      run(SAMPLES, 1'b1);
      conf[wi] = conf_now;
      kl[wi] = 0.0;
      n_truth = 0;
      for (int st = 0; st < 32; st++) begin
        if (truth_row(st)) n_truth += hist[st];
        if (hist[st] > 0) begin
          p = real'(hist[st]) / SAMPLES;
          kl[wi] += p * $ln(p / p_exact[st]);
        end
      end
      truth_frac[wi] = real'(n_truth) / SAMPLES;
      $display("W0 = %0.3f: KL %0.4f, truth-table states %0.3f of samples, copy conflicts per readout %0.4f",
               W0_CODES[wi] / 8.0, kl[wi], truth_frac[wi], real'(conf[wi]) / SAMPLES);
    end
    check(kl[1] < 0.2, "W0 = 4 reproduces the Boltzmann distribution");
    check(truth_frac[1] > 0.7, "W0 = 4 samples mostly truth-table states");
    check(kl[0] > kl[1], "weak copy edge distorts the distribution");
    check(kl[2] > kl[1], "rigid copy edge freezes the sampler");
    check(conf[0] > conf[1], "weak copy edge leaves more copy conflicts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
