// tanh_lut: activation lookup table of a p-bit, in binary form.
//
// The p-bit update m = sgn(tanh(beta*I) - r), r uniform in (-1,1), becomes in
// binary notation m = (u < (1 + tanh(beta*I)) / 2) with u uniform in [0,1).
// This table returns p = floor(2^32 * (1 + tanh(x)) / 2) for the scaled field
// x, a signed fixed-point number with W_FRAC fraction bits. The argument is
// saturated to the table range [-2^(LUT_ADDR-1), 2^(LUT_ADDR-1)-1] / 2^W_FRAC, i.e.
// [-8, 7.875] for the defaults, where (1 + tanh)/2 is already within 1.2e-7 of
// 0 or 1. Purely combinational.
//
// The table itself and the binary mapping (1 + tanh)/2 follow the sampler; its
// size, range and 32-bit output width are this design's choices, matched to the
// 3 fraction bits of the weights and to the 32-bit random word.
module tanh_lut
  import pbit_pkg::*;
#(
  parameter int unsigned XW = 17   // width of the argument (W_FRAC fraction bits)
) (
  input  logic signed [XW-1:0]      x,
  output logic        [P_WIDTH-1:0] p
);
  localparam int XMIN = -(1 << (LUT_ADDR - 1));
  localparam int XMAX = (1 << (LUT_ADDR - 1)) - 1;

  logic [LUT_ADDR-1:0] idx;
  always_comb begin
    if (x < XW'(XMIN))      idx = '0;
    else if (x > XW'(XMAX)) idx = '1;
    else                    idx = LUT_ADDR'(x - XW'(XMIN));
    p = ACT_TABLE[idx];
  end
endmodule
