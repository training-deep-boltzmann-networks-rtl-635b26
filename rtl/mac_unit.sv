// mac_unit: multiplier-accumulator computing the effective field of a p-bit,
// I_i = sum_j J_ij * m_j + h_i.
//
// The states are binary (m_j in {0,1}) and the host has already mapped the
// weights to binary form (J_bin = 2 J_bipolar, h_bin = h_bipolar - sum_j
// J_bipolar), so each product is a select of J_ij or zero and the sum equals
// the bipolar field. Inputs are DEG neighbour states with their s{6}{3}
// weights and the bias; the output has DEG+1 terms of headroom, so it never
// overflows. Purely combinational: the p-bit registers its decision.
//
// The equation, the binary mapping and the 10-bit weights follow the sampler;
// the adder structure is left to synthesis.
module mac_unit
  import pbit_pkg::*;
#(
  parameter int unsigned DEG = MAX_DEG,
  parameter int unsigned WW  = W_WIDTH,
  parameter int unsigned IW  = field_width(W_WIDTH, MAX_DEG)
) (
  input  logic                 [DEG-1:0] m_nbr,
  input  logic signed [WW-1:0]           j_w [DEG],
  input  logic signed [WW-1:0]           h,
  output logic signed [IW-1:0]           field
);
  initial assert (IW >= WW + $clog2(DEG + 1))
    else $error("mac_unit: IW too narrow for DEG terms");

  always_comb begin
    field = IW'(h);
    for (int k = 0; k < DEG; k++)
      if (m_nbr[k]) field = field + IW'(j_w[k]);
  end
endmodule
