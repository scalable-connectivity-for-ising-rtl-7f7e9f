// pbit: one probabilistic bit of the sparse Ising machine.
//
// A p-bit holds its own neighbour weights and bias, adds the weighted states
// of its K neighbours, looks up tanh of the sum and compares it with a fresh
// random number: m <- sign(tanh(I) - r), r ~ U[-1, 1) (Algorithm 1, lines
// 4-5). The paper lists exactly these parts for one p-bit (neighbour
// weights, activation lookup table, PRNG) and draws the adder tree and state
// register; how they are stored and sequenced here is this design's choice.
//
// Storage: K weight registers (slot s multiplies neighbour input nbr_m[s])
// and one bias register at slot index K, all WEIGHT_W-bit s6.3 values that
// already include the inverse temperature beta. They reset to zero and are
// written one at a time through wr_en / wr_slot / wr_data.
//
// Timing: the sum, table and comparison are combinational. On a clock edge
// with `update` high the state register takes the comparison result and the
// PRNG steps; the new state is visible to neighbours one cycle later. The
// comparison is strict (m = +1 only when tanh(I) > r), the tie case being a
// choice the paper leaves open. `load` (priority over update) sets the state
// directly, for Algorithm 1's initialisation. State resets to 0 (m = -1).
module pbit #(
  parameter int           K       = 51,
  parameter logic [K-1:0] VALID   = '1,
  parameter logic [31:0]  SEED    = 32'h9E37_79B9,
  parameter int           SUM_W   = 16,
  localparam int          SLOT_W  = $clog2(K + 1)
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // weight / bias programming
  input  logic                                    wr_en,
  input  logic [SLOT_W-1:0]                       wr_slot,
  input  logic signed [ising_pkg::WEIGHT_W-1:0]   wr_data,
  // neighbour states, one per slot
  input  logic [K-1:0]                            nbr_m,
  // control
  input  logic                                    update,
  input  logic                                    load,
  input  logic                                    load_val,
  // state and observation
  output logic                                    m,
  output logic signed [SUM_W-1:0]                 field
);
  import ising_pkg::*;

  typedef logic signed [WEIGHT_W-1:0] weight_t;

  weight_t                      w [K];
  weight_t                      h;
  logic signed [TANH_W-1:0]     t;
  logic signed [TANH_W-1:0]     r;
  logic                         m_next;
  logic [31:0]                  prng_state;  // observed only by testbenches

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < K; s++) w[s] <= '0;
      h <= '0;
    end else if (wr_en) begin
      if (int'(wr_slot) == K) h <= wr_data;
      else if (int'(wr_slot) < K) w[wr_slot] <= wr_data;
    end
  end

  neighbor_adder #(.K(K), .W_W(WEIGHT_W), .SUM_W(SUM_W), .VALID(VALID)) u_adder (
    .w(w), .m(nbr_m), .h(h), .sum(field)
  );

  tanh_lut #(.IN_W(SUM_W), .OUT_W(TANH_W)) u_lut (
    .i_in(field), .tanh_out(t)
  );

  pbit_prng #(.SEED(SEED), .OUT_W(TANH_W)) u_prng (
    .clk(clk), .rst_n(rst_n), .en(update && !load), .r(r), .state(prng_state)
  );

  assign m_next = (t > r);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      m <= 1'b0;
    else if (load)   m <= load_val;
    else if (update) m <= m_next;
  end

endmodule
