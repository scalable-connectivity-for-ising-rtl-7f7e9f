// sparse_network: the master sparse graph of p-bits.
//
// This is the fabric the paper proposes in place of all-to-all coupling: an
// all-to-all problem of N_LOGICAL nodes is sparsified by giving every node
// COPIES p-bits joined in a chain by ferromagnetic copy edges (weight W0)
// and spreading the node's N_LOGICAL-1 problem edges over its copies, so no
// p-bit has more than K_MAX neighbours (paper, Algorithm 2 and Methods: 100
// nodes, 2 copies, 200 p-bits of degree 51). The wiring is fixed when the
// design elaborates (ising_pkg::neighbor), so every p-bit sees only its own
// neighbours and its adder has K_MAX inputs at any network size. Smaller
// problems run on the same graph by leaving weights at zero, as the paper
// reuses one master graph for a range of logical sizes.
//
// Each p-bit has a fixed colour (greedy colouring, ising_pkg::greedy_colors);
// p-bits of the colour on `color` update in a cycle with `run` high.
//
// Interface: weights and biases are written one per cycle at
// (wr_pbit, wr_slot); slot K_MAX is the bias, slot s < K_MAX multiplies the
// neighbour ising_pkg::neighbor(N_LOGICAL, COPIES, wr_pbit, s). Both ends of
// an edge must be written with the same value to keep J symmetric. `load`
// copies load_state into all p-bits. `m` is the state of every p-bit
// (bit u = p-bit u, 1 meaning +1); a state changed by an update is visible
// on `m` and to the neighbours one cycle later.
module sparse_network #(
  parameter int  N_LOGICAL = 100,
  parameter int  COPIES    = 2,
  parameter int  K_MAX     = 51,
  parameter int  SUM_W     = 16,
  localparam int N_PBITS   = N_LOGICAL * COPIES,
  localparam int NCOLORS   = ising_pkg::num_colors(N_LOGICAL, COPIES),
  localparam int COLOR_W   = (NCOLORS > 1) ? $clog2(NCOLORS) : 1,
  localparam int PBIT_W    = (N_PBITS > 1) ? $clog2(N_PBITS) : 1,
  localparam int SLOT_W    = $clog2(K_MAX + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  wr_en,
  input  logic [PBIT_W-1:0]                     wr_pbit,
  input  logic [SLOT_W-1:0]                     wr_slot,
  input  logic signed [ising_pkg::WEIGHT_W-1:0] wr_data,
  input  logic                                  load,
  input  logic [N_PBITS-1:0]                    load_state,
  input  logic                                  run,
  input  logic [COLOR_W-1:0]                    color,
  output logic [N_PBITS-1:0]                    m,
  output logic signed [SUM_W-1:0]               field [N_PBITS]
);
  import ising_pkg::*;

  localparam color_map_t COLORS = greedy_colors(N_LOGICAL, COPIES);

  // Slot-valid mask of p-bit u
  function automatic logic [K_MAX-1:0] valid_mask(int u);
    logic [K_MAX-1:0] v;
    for (int s = 0; s < K_MAX; s++) v[s] = (neighbor(N_LOGICAL, COPIES, u, s) >= 0);
    return v;
  endfunction

  for (genvar u = 0; u < N_PBITS; u++) begin : g_pbit
    localparam int          MY_COLOR = int'(COLORS[u*ising_pkg::COLOR_FIELD_W +: ising_pkg::COLOR_FIELD_W]);
    localparam logic [K_MAX-1:0] VALID = valid_mask(u);

    logic [K_MAX-1:0] nbr_m;

    for (genvar s = 0; s < K_MAX; s++) begin : g_slot
      localparam int NB = neighbor(N_LOGICAL, COPIES, u, s);
      if (NB >= 0) begin : g_wired
        assign nbr_m[s] = m[NB];
      end else begin : g_open
        assign nbr_m[s] = 1'b0;
      end
    end

    pbit #(.K(K_MAX), .VALID(VALID), .SEED(prng_seed(u)), .SUM_W(SUM_W)) u_pbit (
      .clk      (clk),
      .rst_n    (rst_n),
      .wr_en    (wr_en && (int'(wr_pbit) == u)),
      .wr_slot  (wr_slot),
      .wr_data  (wr_data),
      .nbr_m    (nbr_m),
      .update   (run && (int'(color) == MY_COLOR)),
      .load     (load),
      .load_val (load_state[u]),
      .m        (m[u]),
      .field    (field[u])
    );
  end

  initial begin
    assert (max_degree(N_LOGICAL, COPIES) <= K_MAX)
      else $error("sparse_network: master graph needs %0d slots, K_MAX is %0d",
                  max_degree(N_LOGICAL, COPIES), K_MAX);
    assert (N_PBITS <= MAX_PBITS) else $error("sparse_network: too many p-bits");
    assert (COPIES >= 1 && N_LOGICAL >= 2) else $error("sparse_network: bad size");
  end

endmodule
