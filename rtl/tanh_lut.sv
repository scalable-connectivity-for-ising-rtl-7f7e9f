// tanh_lut: activation lookup table of a p-bit.
//
// A p-bit turns its input I into the probability bias tanh(I) (Algorithm 1,
// line 5); the paper's p-bits hold this as a lookup table. The table here
// has LUT_DEPTH = 128 entries: I, a signed fixed-point number with 3 fraction
// bits like the weights, is clamped to [-8, +7.875] and the entry for I is
// round(tanh(I) * 2^(TANH_W-1)), saturated to +/-(2^(TANH_W-1) - 1). The
// range, the 1/8 step (equal to the weight resolution) and the 12-bit output
// are this design's choices: tanh(8) differs from 1 by less than one output
// step, so clamping loses nothing visible at this output width.
//
// The table contents are computed when the design elaborates
// (ising_pkg::tanh_entry); the read is purely combinational.
module tanh_lut #(
  parameter int IN_W  = 16,
  parameter int OUT_W = ising_pkg::TANH_W
) (
  input  logic signed [IN_W-1:0]  i_in,
  output logic signed [OUT_W-1:0] tanh_out
);
  import ising_pkg::*;

  localparam int HALF = LUT_DEPTH / 2;

  typedef logic signed [OUT_W-1:0] entry_t;

  function automatic logic [LUT_DEPTH*OUT_W-1:0] build_table();
    logic [LUT_DEPTH*OUT_W-1:0] t;
    for (int a = 0; a < LUT_DEPTH; a++) t[a*OUT_W +: OUT_W] = OUT_W'(tanh_entry(a) >>> (TANH_W - OUT_W));
    return t;
  endfunction

  localparam logic [LUT_DEPTH*OUT_W-1:0] TABLE = build_table();

  logic [$clog2(LUT_DEPTH)-1:0] addr;

  always_comb begin
    if (i_in < -IN_W'(HALF))          addr = '0;
    else if (i_in > IN_W'(HALF - 1))  addr = '1;
    else                               addr = $clog2(LUT_DEPTH)'(i_in + IN_W'(HALF));
  end

  assign tanh_out = entry_t'(TABLE[addr*OUT_W +: OUT_W]);

  initial assert (OUT_W <= TANH_W) else $error("tanh_lut: OUT_W above TANH_W");

endmodule
