// color_sequencer_tb: five colours. Checks that a run of S sweeps lasts
// exactly S*5 update cycles with colours 0..4 in order, the sweep pulses and
// counter, the single done pulse, a zero-sweep run and that start is ignored
// while busy.
module color_sequencer_tb;
  localparam int NC = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] num_sweeps = 0;
  logic busy, run, sweep_done, done;
  logic [2:0] color;
  logic [15:0] sweep_count;
  int checks = 0, failures = 0;

  color_sequencer #(.NCOLORS(NC), .SWEEP_W(16)) dut (
    .clk, .rst_n, .start, .num_sweeps, .busy, .run, .color, .sweep_done, .done, .sweep_count);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_run(int s, bit poke_start);
    int cycles, pulses, dones, exp_c;
    @(negedge clk) begin start = 1; num_sweeps = 16'(s); end
    @(negedge clk) begin start = 0; num_sweeps = 16'hFFFF; end
    cycles = 0; pulses = 0; dones = 0; exp_c = 0;
    // the first update cycle is this one
    while (run) begin
      check(int'(color) == exp_c, $sformatf("colour order: got %0d exp %0d", color, exp_c));
      check(busy, "busy during run");
      check(sweep_done == (exp_c == NC - 1), "sweep pulse on last colour");
      pulses += sweep_done;
      exp_c = (exp_c + 1) % NC;
      cycles++;
      if (poke_start && cycles == 3) start = 1;
      @(negedge clk);
      start = 0;
      dones += done;
    end
    check(cycles == s * NC, $sformatf("run of %0d sweeps took %0d cycles", s, cycles));
    check(pulses == s, "sweep pulses");
    check(int'(sweep_count) == s, $sformatf("sweep_count %0d", sweep_count));
    check(dones == 1 || (s == 0), "done at end");
    repeat (3) begin
      @(negedge clk);
      dones += done;
      check(!busy && !run, "idle after run");
    end
    check(dones == 1, $sformatf("exactly one done pulse, got %0d", dones));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    check(!busy && !run && color == 0, "reset idle");
    rst_n = 1;
    do_run(3, 0);
    do_run(1, 1);
    do_run(7, 0);
    // zero sweeps: no update cycle, one done
    @(negedge clk) begin start = 1; num_sweeps = 0; end
    @(negedge clk) start = 0;
    check(done && !run, "zero-sweep run ends at once");
    @(negedge clk) check(!done && !busy, "zero-sweep done is one pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
