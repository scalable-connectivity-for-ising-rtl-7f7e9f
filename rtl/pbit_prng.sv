// pbit_prng: the random number source of one p-bit.
//
// Each p-bit draws a fresh r ~ U[-1, 1) whenever it updates (Algorithm 1,
// line 5: m = sign(tanh(I) - r)). The paper only names a pseudorandom number
// generator per p-bit; the generator type is this design's choice: a 32-bit
// Marsaglia xorshift (shifts 13, 17, 5, period 2^32 - 1) with a per-p-bit
// non-zero seed. The upper TANH_W bits of the state, read as a signed
// two's-complement fraction, are the random number r.
//
// Interface and timing: `state` is loaded with SEED on reset and advances by
// one xorshift step on every clock edge with `en` high. `r` is the current
// state's upper bits, so the number used in an update is the one present in
// the cycle of that update; the next update sees the following number.
module pbit_prng #(
  parameter logic [31:0] SEED   = 32'h9E37_79B9,
  parameter int          OUT_W  = ising_pkg::TANH_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  output logic signed [OUT_W-1:0] r,
  output logic [31:0]             state
);

  logic [31:0] x1, x2, x3;

  always_comb begin
    x1 = state ^ (state << 13);
    x2 = x1 ^ (x1 >> 17);
    x3 = x2 ^ (x2 << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= x3;
  end

  assign r = state[31 -: OUT_W];

  initial assert (SEED != 32'd0) else $error("pbit_prng: SEED must be non-zero");

endmodule
