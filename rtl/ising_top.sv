// ising_top: sparse p-bit Ising machine (Gibbs sampler) with a master graph
// of N_LOGICAL logical nodes x COPIES copies.
//
// The machine samples the Boltzmann distribution of, or anneals towards the
// ground state of, E = -sum J_ij m_i m_j - sum h_i m_i on the sparsified
// graph. A host (a PCIe link on the paper's FPGA board, not part of this
// RTL) drives the plain ports below:
//   1. write every weight and bias (already multiplied by beta) through
//      wr_en / wr_pbit / wr_slot / wr_data, one per cycle; copy edges carry
//      the copy weight W0, unused edges stay 0;
//   2. optionally set the initial spins with load / load_state;
//   3. pulse start with num_sweeps; the sweep controller then updates one
//      colour class per cycle, so a sweep lasts NCOLORS cycles (51 for the
//      default graph) and busy falls, with a done pulse, after
//      num_sweeps * NCOLORS cycles;
//   4. read the p-bit states on m (sweep_done pulses in the last cycle of
//      each sweep, so sampling in the cycle after it sees whole sweeps), or pulse sample to get the merged logical
//      spins (spins, conflict, n_conflicts) one cycle later on spins_valid.
// Annealing is done by the host: rewrite the weights with the next beta and
// start again; p-bit states are kept between runs.
//
// Programming is only meant while idle; a write during a run takes effect
// in the next update of that p-bit. The paper updates colour classes from
// phase-shifted clocks inside one period of a slower clock; here a single
// clock steps through the colours, which gives the same update sequence.
module ising_top #(
  parameter int  N_LOGICAL = 100,
  parameter int  COPIES    = 2,
  parameter int  K_MAX     = 51,
  parameter int  SWEEP_W   = 32,
  localparam int N_PBITS   = N_LOGICAL * COPIES,
  localparam int NCOLORS   = ising_pkg::num_colors(N_LOGICAL, COPIES),
  localparam int COLOR_W   = (NCOLORS > 1) ? $clog2(NCOLORS) : 1,
  localparam int PBIT_W    = (N_PBITS > 1) ? $clog2(N_PBITS) : 1,
  localparam int SLOT_W    = $clog2(K_MAX + 1),
  localparam int CNT_W     = $clog2(N_LOGICAL + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // programming
  input  logic                                  wr_en,
  input  logic [PBIT_W-1:0]                     wr_pbit,
  input  logic [SLOT_W-1:0]                     wr_slot,
  input  logic signed [ising_pkg::WEIGHT_W-1:0] wr_data,
  input  logic                                  load,
  input  logic [N_PBITS-1:0]                    load_state,
  // sweep control
  input  logic                                  start,
  input  logic [SWEEP_W-1:0]                    num_sweeps,
  output logic                                  busy,
  output logic                                  done,
  output logic [SWEEP_W-1:0]                    sweep_count,
  output logic                                  sweep_done,
  output logic [COLOR_W-1:0]                    color,
  // readout
  output logic [N_PBITS-1:0]                    m,
  input  logic                                  sample,
  output logic                                  spins_valid,
  output logic [N_LOGICAL-1:0]                  spins,
  output logic [N_LOGICAL-1:0]                  conflict,
  output logic [CNT_W-1:0]                      n_conflicts
);

  logic run;
  logic signed [15:0] field [N_PBITS];

  color_sequencer #(.NCOLORS(NCOLORS), .SWEEP_W(SWEEP_W)) u_seq (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (start),
    .num_sweeps  (num_sweeps),
    .busy        (busy),
    .run         (run),
    .color       (color),
    .sweep_done  (sweep_done),
    .done        (done),
    .sweep_count (sweep_count)
  );

  sparse_network #(.N_LOGICAL(N_LOGICAL), .COPIES(COPIES), .K_MAX(K_MAX), .SUM_W(16)) u_net (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (wr_en),
    .wr_pbit    (wr_pbit),
    .wr_slot    (wr_slot),
    .wr_data    (wr_data),
    .load       (load),
    .load_state (load_state),
    .run        (run),
    .color      (color),
    .m          (m),
    .field      (field)
  );

  copy_resolver #(.N_LOGICAL(N_LOGICAL), .COPIES(COPIES)) u_resolve (
    .clk         (clk),
    .rst_n       (rst_n),
    .sample      (sample),
    .m_phys      (m),
    .valid       (spins_valid),
    .spins       (spins),
    .conflict    (conflict),
    .n_conflicts (n_conflicts)
  );

  // programming targets an existing p-bit and slot
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_en |-> (int'(wr_pbit) < N_PBITS && int'(wr_slot) <= K_MAX));

endmodule
