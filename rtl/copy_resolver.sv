// copy_resolver: reads the logical spins out of the sparse graph.
//
// After sparsification every logical node is held by COPIES p-bits. To read
// a solution the copies are merged back into one spin (paper, Secs. III-IV):
// copies that agree give their common value; with two copies a disagreement
// is settled by an unbiased coin flip, with more copies by a majority vote
// (a tie, possible for an even count, again by coin flip). The paper does
// this merge when it evaluates results; building it in hardware next to the
// network is this design's choice. Coins come from xorshift generators
// (one 32-bit generator per 32 logical nodes) that step on every sample.
//
// Interface and timing: on a clock edge with `sample` high the merge of the
// present `m_phys` is registered; `spins`, `conflict` (copies of that node
// did not all agree) and `n_conflicts` (number of such nodes, the copy
// conflict count) are valid from the next cycle, flagged by a one-cycle
// `valid` pulse. Physical indexing follows ising_pkg::phys_index.
module copy_resolver #(
  parameter int  N_LOGICAL = 100,
  parameter int  COPIES    = 2,
  localparam int N_PBITS   = N_LOGICAL * COPIES,
  localparam int CNT_W     = $clog2(N_LOGICAL + 1),
  localparam int NGEN      = (N_LOGICAL + 31) / 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sample,
  input  logic [N_PBITS-1:0]   m_phys,
  output logic                 valid,
  output logic [N_LOGICAL-1:0] spins,
  output logic [N_LOGICAL-1:0] conflict,
  output logic [CNT_W-1:0]     n_conflicts
);
  import ising_pkg::*;

  localparam int VOTE_W = $clog2(COPIES + 1);

  logic [32*NGEN-1:0]    coins;
  logic [N_LOGICAL-1:0]  spin_d, conf_d;
  logic [CNT_W-1:0]      nconf_d;

  for (genvar g = 0; g < NGEN; g++) begin : g_coin
    pbit_prng #(.SEED(prng_seed(MAX_PBITS + g)), .OUT_W(1)) u_coin (
      .clk(clk), .rst_n(rst_n), .en(sample), .r(), .state(coins[32*g +: 32])
    );
  end

  always_comb begin
    logic [VOTE_W-1:0] ones;
    nconf_d = '0;
    for (int i = 0; i < N_LOGICAL; i++) begin
      ones = '0;
      for (int c = 0; c < COPIES; c++)
        ones = ones + VOTE_W'(m_phys[phys_index(N_LOGICAL, COPIES, i, c)]);
      conf_d[i] = (ones != '0) && (int'(ones) != COPIES);
      if (2 * int'(ones) > COPIES)       spin_d[i] = 1'b1;
      else if (2 * int'(ones) < COPIES)  spin_d[i] = 1'b0;
      else                               spin_d[i] = coins[i];
      nconf_d = nconf_d + CNT_W'(conf_d[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid       <= 1'b0;
      spins       <= '0;
      conflict    <= '0;
      n_conflicts <= '0;
    end else begin
      valid <= sample;
      if (sample) begin
        spins       <= spin_d;
        conflict    <= conf_d;
        n_conflicts <= nconf_d;
      end
    end
  end

endmodule
