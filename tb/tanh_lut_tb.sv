// tanh_lut_tb: sweeps the input over and beyond the table range and compares
// with round(tanh(I/8) * 2048) from the floating-point $tanh, checks odd
// symmetry, monotonicity and saturation.
module tanh_lut_tb;
  logic signed [15:0] i_in;
  logic signed [11:0] tanh_out;
  int checks = 0, failures = 0;

  tanh_lut #(.IN_W(16), .OUT_W(12)) dut (.i_in, .tanh_out);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int expected(int i);
    real q;
    int  e;
    if (i < -64) i = -64;
    if (i > 63) i = 63;
    q = $tanh(real'(i) / 8.0) * 2048.0;
    e = (q >= 0.0) ? $rtoi(q + 0.5) : -$rtoi(0.5 - q);
    if (e > 2047) e = 2047;
    if (e < -2047) e = -2047;
    return e;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev, d, pos;
    prev = -4096;
    for (int i = -300; i <= 300; i++) begin
      i_in = 16'(i); #1;
      d = int'(tanh_out) - expected(i);
      check(d >= -1 && d <= 1, $sformatf("I=%0d got %0d exp %0d", i, tanh_out, expected(i)));
      check(int'(tanh_out) >= prev, $sformatf("monotonic at %0d", i));
      prev = int'(tanh_out);
    end
    // exact points
    i_in = 0;  #1; check(tanh_out == 0, "tanh(0)");
    i_in = 8;  #1; check(tanh_out == 12'sd1560, "tanh(1) = 0.76159*2048");
    i_in = -8; #1; check(tanh_out == -12'sd1560, "tanh(-1)");
    i_in = 16'sh7fff; #1; check(tanh_out == 12'sd2047, "positive saturation");
    i_in = 16'sh8000; #1; check(tanh_out == -12'sd2047, "negative saturation");
    // odd symmetry inside the table
    for (int i = 1; i < 64; i++) begin
      i_in = 16'(i); #1; pos = int'(tanh_out);
      i_in = 16'(-i); #1;
      check(int'(tanh_out) == -pos, $sformatf("odd symmetry at %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
