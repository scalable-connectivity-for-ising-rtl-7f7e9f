// sparse_network_tb: master graph of 6 logical nodes x 2 copies (12 p-bits,
// the size of the paper's small Max-Cut example) and 5 x 2 (the full-adder
// example, at most 3 neighbours per p-bit).
//
// Structure: every logical pair is joined by exactly one edge between some
// copy of each node, copies are chained, degrees stay within K_MAX, the
// neighbour relation is symmetric and the colouring is proper.
// Behaviour: random symmetric weights are written to both ends of each
// edge; the fields are compared with a dense reference sum, then the network
// is run colour by colour and every p-bit state is compared with the
// reference Gibbs model after every cycle.
module sparse_network_tb;
  import ising_pkg::*;
  import ising_ref_pkg::*;

  localparam int NL = 6, C = 2, KM = 4;
  localparam int NP = NL * C;
  localparam int NCOL = num_colors(NL, C);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [3:0] wr_pbit = 0;
  logic [2:0] wr_slot = 0;
  logic signed [9:0] wr_data = 0;
  logic load = 0;
  logic [NP-1:0] load_state = 0;
  logic run = 0;
  logic [$clog2(NCOL)-1:0] color = 0;
  logic [NP-1:0] m;
  logic signed [15:0] field [NP];
  int checks = 0, failures = 0;

  sparse_network #(.N_LOGICAL(NL), .COPIES(C), .K_MAX(KM)) dut (
    .clk, .rst_n, .wr_en, .wr_pbit, .wr_slot, .wr_data, .load, .load_state,
    .run, .color, .m, .field);

  // second, structure-only instance: the full adder graph
  logic [9:0] m_fa;
  logic signed [15:0] field_fa [10];
  sparse_network #(.N_LOGICAL(5), .COPIES(2), .K_MAX(3)) dut_fa (
    .clk, .rst_n, .wr_en(1'b0), .wr_pbit('0), .wr_slot('0), .wr_data('0), .load(1'b0),
    .load_state('0), .run(1'b0), .color('0), .m(m_fa), .field(field_fa));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit joined(int n, int c, int u, int v);
    return slot_of(n, c, u, v) >= 0;
  endfunction

  task automatic check_structure(int n, int c, int kmax);
    int cnt, nb;
    color_map_t cm;
    cm = greedy_colors(n, c);
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++) begin
        cnt = 0;
        for (int a = 0; a < c; a++)
          for (int b = 0; b < c; b++)
            cnt += joined(n, c, phys_index(n, c, i, a), phys_index(n, c, j, b));
        check(cnt == 1, $sformatf("N=%0d: logical edge %0d-%0d held %0d times", n, i, j, cnt));
      end
    for (int i = 0; i < n; i++)
      for (int a = 0; a + 1 < c; a++)
        check(joined(n, c, phys_index(n, c, i, a), phys_index(n, c, i, a + 1)), "copy chain");
    for (int u = 0; u < n * c; u++) begin
      check(degree(n, c, u) <= kmax, "degree within K_MAX");
      for (int s = 0; s < degree(n, c, u); s++) begin
        nb = neighbor(n, c, u, s);
        check(nb >= 0 && nb < n * c && nb != u && joined(n, c, nb, u), "symmetric neighbour");
        check(cm[u*COLOR_FIELD_W +: COLOR_FIELD_W] != cm[nb*COLOR_FIELD_W +: COLOR_FIELD_W], "proper colouring");
      end
    end
  endtask

  task automatic write(int u, int s, int val);
    @(negedge clk);
    wr_en = 1; wr_pbit = 4'(u); wr_slot = 3'(s); wr_data = 10'(val);
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    gibbs_model ref_m;
    color_map_t cm;
    int v, used;
    check_structure(NL, C, KM);
    check_structure(5, 2, 3);
    check_structure(100, 2, 51);
    check(max_degree(100, 2) == 51 && max_degree(100, 3) == 35 && max_degree(100, 4) == 27,
          "degrees 51/35/27 for 2/3/4 copies of 100 nodes");
    ref_m = new(NP);
    cm = greedy_colors(NL, C);
    for (int u = 0; u < NP; u++) begin
      ref_m.color[u] = int'(cm[u*COLOR_FIELD_W +: COLOR_FIELD_W]);
      ref_m.rng[u] = prng_seed(u);
      ref_m.h[u] = $urandom_range(0, 16) - 8;
    end
    for (int u = 0; u < NP; u++)
      for (int v2 = u + 1; v2 < NP; v2++)
        if (joined(NL, C, u, v2)) begin
          v = $urandom_range(0, 40) - 20;
          ref_m.jmat[u][v2] = v;
          ref_m.jmat[v2][u] = v;
        end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int u = 0; u < NP; u++) begin
      for (int s = 0; s < degree(NL, C, u); s++)
        write(u, s, ref_m.jmat[u][neighbor(NL, C, u, s)]);
      write(u, KM, ref_m.h[u]);
    end
    // load a random state
    @(negedge clk) begin load = 1; load_state = NP'($urandom); end
    @(negedge clk) load = 0;
    for (int u = 0; u < NP; u++) ref_m.m[u] = load_state[u];
    check(m == load_state, "state load");
    for (int u = 0; u < NP; u++)
      check(int'(field[u]) == ref_m.field(u), $sformatf("field of p-bit %0d", u));
    // run colour by colour and compare every cycle
    used = 0;
    for (int k = 0; k < 60 * NCOL; k++) begin
      @(negedge clk) begin run = 1; color = $bits(color)'(k % NCOL); end
      @(posedge clk); #1;
      ref_m.step(k % NCOL);
      for (int u = 0; u < NP; u++) begin
        check(m[u] == ref_m.m[u], $sformatf("cycle %0d p-bit %0d", k, u));
        check(int'(field[u]) == ref_m.field(u), "field after update");
      end
    end
    // no update without run
    @(negedge clk) run = 0;
    v = int'(m);
    repeat (10) @(posedge clk);
    #1 check(int'(m) == v, "hold without run");
    $display("colours: %0d for 6x2, %0d for 100x2", NCOL, num_colors(100, 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
