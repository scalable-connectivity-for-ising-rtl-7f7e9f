// pbit_prng_tb: checks the xorshift32 sequence, the enable, the reset seed,
// the r slice and that r is roughly uniform on [-1, 1).
module pbit_prng_tb;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [11:0] r;
  logic [31:0] state;
  int checks = 0, failures = 0;
  localparam logic [31:0] SEED = 32'h1234_5678;

  pbit_prng #(.SEED(SEED), .OUT_W(12)) dut (.clk, .rst_n, .en, .r, .state);

  always #5 clk = ~clk;

  function automatic logic [31:0] ref_step(logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    return t ^ (t << 5);
  endfunction

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
    logic [31:0] exp_s;
    longint sum;
    int pos;
    repeat (2) @(posedge clk);
    check(state == SEED, "reset value");
    @(negedge clk) rst_n = 1;
    exp_s = SEED;
    // enable low: holds
    repeat (3) @(posedge clk);
    check(state == SEED, "hold while disabled");
    @(negedge clk) en = 1;
    sum = 0; pos = 0;
    for (int k = 0; k < 4000; k++) begin
      @(posedge clk); #1;
      exp_s = ref_step(exp_s);
      check(state == exp_s, $sformatf("step %0d", k));
      check(r == $signed(exp_s[31:20]), "r slice");
      sum += r;
      if (r >= 0) pos++;
    end
    // mean of 4000 draws of U[-2048,2047]: sd ~ 18.7, allow 5 sd
    check(sum / 4000 > -100 && sum / 4000 < 100, "mean near zero");
    check(pos > 1800 && pos < 2200, "half of the draws non-negative");
    @(negedge clk) en = 0;
    @(posedge clk); #1;
    check(state == exp_s, "hold after disable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
