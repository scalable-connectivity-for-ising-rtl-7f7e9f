// neighbor_adder_tb: random weights, spins and biases at K = 51 (one slot
// unwired) and K = 3, compared with a sequential sum; includes the extremes.
module neighbor_adder_tb;
  localparam int K = 51;
  localparam logic [K-1:0] VALID = {1'b0, {(K-1){1'b1}}};
  logic signed [9:0]  w [K];
  logic [K-1:0]       m;
  logic signed [9:0]  h;
  logic signed [15:0] sum;
  logic signed [9:0]  w3 [3];
  logic [2:0]         m3;
  logic signed [15:0] sum3;
  int checks = 0, failures = 0;

  neighbor_adder #(.K(K), .W_W(10), .SUM_W(16), .VALID(VALID)) dut (.w, .m, .h, .sum);
  neighbor_adder #(.K(3), .W_W(10), .SUM_W(16)) dut3 (.w(w3), .m(m3), .h(h), .sum(sum3));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, e3;
    for (int t = 0; t < 3000; t++) begin
      for (int s = 0; s < K; s++) w[s] = 10'($urandom);
      for (int s = 0; s < 3; s++) w3[s] = 10'($urandom);
      m = {$urandom, $urandom};
      m3 = 3'($urandom);
      h = 10'($urandom);
      if (t == 0) begin
        for (int s = 0; s < K; s++) w[s] = -10'sd512;
        m = '0; h = -10'sd512;
      end
      if (t == 1) begin
        for (int s = 0; s < K; s++) w[s] = 10'sd511;
        m = '1; h = 10'sd511;
      end
      #1;
      e = int'(h);
      for (int s = 0; s < K - 1; s++) e += m[s] ? int'(w[s]) : -int'(w[s]);
      e3 = int'(h);
      for (int s = 0; s < 3; s++) e3 += m3[s] ? int'(w3[s]) : -int'(w3[s]);
      check(int'(sum) == e, $sformatf("K=51 trial %0d got %0d exp %0d", t, sum, e));
      check(int'(sum3) == e3, $sformatf("K=3 trial %0d got %0d exp %0d", t, sum3, e3));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
