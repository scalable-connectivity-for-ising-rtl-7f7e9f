// copy_resolver_tb: two copies (coin flip on disagreement) and three copies
// (majority vote). Checks agreeing copies, the conflict flags and count,
// majority results, that coin flips are not stuck (both outcomes occur and
// roughly half are +1) and the one-cycle valid pulse.
module copy_resolver_tb;
  import ising_pkg::*;
  localparam int N2 = 40, N3 = 10;

  logic clk = 0, rst_n = 0, sample = 0;
  logic [2*N2-1:0] m2 = 0;
  logic [3*N3-1:0] m3 = 0;
  logic v2, v3;
  logic [N2-1:0] s2, c2;
  logic [N3-1:0] s3, c3;
  logic [$clog2(N2+1)-1:0] n2;
  logic [$clog2(N3+1)-1:0] n3;
  int checks = 0, failures = 0;

  copy_resolver #(.N_LOGICAL(N2), .COPIES(2)) dut2 (
    .clk, .rst_n, .sample, .m_phys(m2), .valid(v2), .spins(s2), .conflict(c2), .n_conflicts(n2));
  copy_resolver #(.N_LOGICAL(N3), .COPIES(3)) dut3 (
    .clk, .rst_n, .sample, .m_phys(m3), .valid(v3), .spins(s3), .conflict(c3), .n_conflicts(n3));

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

  initial begin
    int ones_coin, coins, nconf, votes;
    bit a, b;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ones_coin = 0; coins = 0;
    for (int t = 0; t < 400; t++) begin
      m2 = {$urandom, $urandom, $urandom};
      m3 = {$urandom, $urandom};
      if (t == 0) begin m2 = '0; m3 = '1; end
      @(negedge clk) sample = 1;
      @(negedge clk) sample = 0;
      check(v2 && v3, "valid after sample");
      nconf = 0;
      for (int i = 0; i < N2; i++) begin
        a = m2[phys_index(N2, 2, i, 0)];
        b = m2[phys_index(N2, 2, i, 1)];
        check(c2[i] == (a != b), "2-copy conflict flag");
        if (a == b) check(s2[i] == a, "agreeing copies");
        else begin coins++; ones_coin += s2[i]; nconf++; end
      end
      check(int'(n2) == nconf, "2-copy conflict count");
      nconf = 0;
      for (int i = 0; i < N3; i++) begin
        votes = 0;
        for (int c = 0; c < 3; c++) votes += m3[phys_index(N3, 3, i, c)];
        check(s3[i] == (votes >= 2), $sformatf("majority of %0d", votes));
        check(c3[i] == (votes == 1 || votes == 2), "3-copy conflict flag");
        nconf += (votes == 1 || votes == 2);
      end
      check(int'(n3) == nconf, "3-copy conflict count");
      @(negedge clk);
      check(!v2 && !v3, "valid is one cycle");
    end
    check(coins > 1000, "enough coin flips seen");
    check(ones_coin > coins * 45 / 100 && ones_coin < coins * 55 / 100,
          $sformatf("coins unbiased: %0d of %0d", ones_coin, coins));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
