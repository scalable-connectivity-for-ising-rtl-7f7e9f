// pbit_tb: one p-bit with four slots (slot 3 not wired). Checks weight and
// bias programming through the field output, the update rule
// m = (tanh(I) > r) cycle by cycle against a reference PRNG and tanh, the
// probability of +1 at a fixed field, hold without update and load priority.
module pbit_tb;
  import ising_ref_pkg::*;
  localparam int K = 4;
  localparam logic [K-1:0] VALID = 4'b0111;
  localparam logic [31:0] SEED = 32'hCAFE_F00D;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [2:0] wr_slot = 0;
  logic signed [9:0] wr_data = 0;
  logic [K-1:0] nbr_m = 0;
  logic update = 0, load = 0, load_val = 0;
  logic m;
  logic signed [15:0] field;
  int checks = 0, failures = 0;

  pbit #(.K(K), .VALID(VALID), .SEED(SEED), .SUM_W(16)) dut (
    .clk, .rst_n, .wr_en, .wr_slot, .wr_data, .nbr_m, .update, .load, .load_val, .m, .field);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(int slot, int val);
    @(negedge clk);
    wr_en = 1; wr_slot = 3'(slot); wr_data = 10'(val);
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w [K];
    int h, e, ones;
    logic [31:0] rng;
    bit exp_m;
    w = '{5, -3, 7, 100};
    h = 2;
    repeat (2) @(posedge clk);
    #1 check(m == 0 && field == 0, "reset state and zero weights");
    @(negedge clk) rst_n = 1;
    for (int s = 0; s < K; s++) write(s, w[s]);
    write(K, h);
    for (int p = 0; p < 16; p++) begin
      nbr_m = 4'(p); #1;
      e = h;
      for (int s = 0; s < 3; s++) e += nbr_m[s] ? w[s] : -w[s];
      check(int'(field) == e, $sformatf("field pattern %0d got %0d exp %0d", p, field, e));
    end
    // update rule against the reference, with changing neighbours
    rng = SEED;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      nbr_m = 4'($urandom);
      update = 1;
      #1;
      exp_m = tanh_q(int'(field)) > signed_r(rng);
      @(posedge clk); #1;
      rng = xorshift(rng);
      check(m == exp_m, $sformatf("update %0d", k));
    end
    // probability of +1 at I = 8 (1.0): (1 + tanh 1) / 2 = 0.8808
    write(0, 0); write(1, 0); write(2, 0); write(K, 8);
    ones = 0;
    @(negedge clk) update = 1;
    for (int k = 0; k < 4000; k++) begin
      @(posedge clk); #1;
      ones += m;
    end
    check(ones > 3400 && ones < 3640, $sformatf("P(+1) at I=1: %0d/4000", ones));
    // hold without update
    @(negedge clk) update = 0;
    exp_m = m;
    repeat (20) begin
      @(negedge clk); write(K, (m ? -64 : 64));
      check(m == exp_m, "hold when update is low");
    end
    // load has priority over update
    @(negedge clk) begin load = 1; update = 1; load_val = ~m; end
    exp_m = load_val;
    @(posedge clk); #1;
    check(m == exp_m, "load priority");
    @(negedge clk) load_val = ~load_val;
    @(posedge clk); #1;
    check(m == ~exp_m, "second load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
