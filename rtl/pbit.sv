// pbit: one probabilistic bit, m = sgn(tanh(beta * I) - r), in binary form.
//
// The p-bit holds a xoshiro128** generator, the activation table and a
// comparator. The effective field I from the p-bit's MAC unit is scaled by the
// inverse temperature beta (u{3}{3}, so 8 means beta = 1) to x = beta*I with 3
// fraction bits; the table gives p = 2^32 (1 + tanh(x)) / 2 and the state
// becomes m = (rnd < p), i.e. 1 with probability (1 + tanh(beta*I)) / 2.
//
// Timing: `update` is the strobe of the p-bit's color phase (already gated by
// the global run enable). In that cycle the comparator uses the current random
// word and the field computed from the neighbours' registered states; on the
// clock edge m is written and the generator steps. m resets to 0.
//
// The three parts and the update rule follow the sampler. The beta
// multiplier in front of the table (used for annealing from beta = 0 to 5 in
// steps of 0.125) and the reset value are this design's choices.
module pbit
  import pbit_pkg::*;
#(
  parameter int unsigned   IW   = field_width(W_WIDTH, MAX_DEG),
  parameter logic [127:0]  SEED = pbit_seed(0)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         update,
  input  logic        [BETA_WIDTH-1:0] beta,
  input  logic signed [IW-1:0]         field,
  output logic                         m
);
  localparam int unsigned XW = IW + BETA_WIDTH + 1 - BETA_FRAC;

  logic [31:0]          rnd;
  logic [P_WIDTH-1:0]   p;
  logic signed [IW+BETA_WIDTH:0] prod;
  logic signed [XW-1:0] x;

  xoshiro128ss #(.SEED(SEED)) u_prng (
    .clk   (clk),
    .rst_n (rst_n),
    .step  (update),
    .rnd   (rnd)
  );

  always_comb begin
    prod = field * $signed({1'b0, beta});
    x    = XW'(prod >>> BETA_FRAC);
  end

  tanh_lut #(.XW(XW)) u_lut (
    .x (x),
    .p (p)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      m <= 1'b0;
    else if (update) m <= (rnd < p);
  end
endmodule
