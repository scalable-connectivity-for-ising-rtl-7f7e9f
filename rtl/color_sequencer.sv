// color_sequencer: sweep controller of the sparse Ising machine.
//
// In a coloured sparse graph no two p-bits of one colour are neighbours, so
// a whole colour class can update at once and a Monte Carlo sweep (every
// p-bit updated once) takes one step per colour, whatever the network size.
// The paper drives each colour from its own phase-shifted clock; this design
// uses one clock and a rotating colour index instead, which gives the same
// update order: colour 0, 1, ..., NCOLORS-1, then the next sweep.
//
// Interface: a `start` pulse while idle begins a run of `num_sweeps` sweeps
// (Algorithm 1, line 2); `busy` is high during the run, `run` is high in
// every update cycle and `color` names the class that updates in it. Each
// finished sweep gives a one-cycle `sweep_done` pulse and increments
// `sweep_count` (cleared at start). After the last sweep `done` pulses once.
// A run of 0 sweeps ends at once. `start` while busy is ignored.
//
// Timing: a run of S sweeps takes exactly S * NCOLORS update cycles; `done`
// is high in the cycle after the last update.
module color_sequencer #(
  parameter int NCOLORS  = 51,
  parameter int SWEEP_W  = 32,
  localparam int COLOR_W = (NCOLORS > 1) ? $clog2(NCOLORS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [SWEEP_W-1:0] num_sweeps,
  output logic               busy,
  output logic               run,
  output logic [COLOR_W-1:0] color,
  output logic               sweep_done,
  output logic               done,
  output logic [SWEEP_W-1:0] sweep_count
);

  typedef enum logic [0:0] {IDLE, RUN} state_t;

  state_t             state;
  logic [SWEEP_W-1:0] target;
  logic               last_color;

  assign last_color = (int'(color) == NCOLORS - 1);
  assign busy       = (state == RUN);
  assign run        = (state == RUN);
  assign sweep_done = run && last_color;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      color       <= '0;
      target      <= '0;
      sweep_count <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          color       <= '0;
          target      <= num_sweeps;
          sweep_count <= '0;
          if (num_sweeps == '0) done  <= 1'b1;
          else                  state <= RUN;
        end
        RUN: begin
          if (last_color) begin
            color       <= '0;
            sweep_count <= sweep_count + 1'b1;
            if (sweep_count + 1'b1 == target) begin
              state <= IDLE;
              done  <= 1'b1;
            end
          end else begin
            color <= color + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // the colour index never leaves its range
  assert property (@(posedge clk) disable iff (!rst_n) int'(color) < NCOLORS);
  // done and an update cycle never coincide
  assert property (@(posedge clk) disable iff (!rst_n) !(done && run));

endmodule
