// xoshiro128ss: 32-bit xoshiro128** pseudorandom number generator.
//
// Every p-bit owns one generator. The 128-bit state {s3,s2,s1,s0} is loaded
// with SEED at reset. The output word `rnd` is a combinational function of the
// current state, rotl(s1 * 5, 7) * 9, so it is valid in the cycle the p-bit
// uses it; when `step` is high the state advances by one xoshiro128** step on
// the rising clock edge. `step` is the p-bit's color-phase strobe, which plays
// the role of the colored clock that triggers the generator in the sampler.
//
// That the generator is a 32-bit xoshiro is the sampler's own choice; the
// particular member of the family (xoshiro128**, scrambler "**") and the
// seeding are this design's choices.
module xoshiro128ss #(
  parameter logic [127:0] SEED = 128'h0000_0004_0000_0003_0000_0002_0000_0001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [31:0] rnd
);
  logic [31:0] s0, s1, s2, s3;

  function automatic logic [31:0] rotl(logic [31:0] x, int unsigned k);
    return (x << k) | (x >> (32 - k));
  endfunction

  logic [31:0] s1x5;
  always_comb begin
    s1x5 = (s1 << 2) + s1;                         // s1 * 5
    rnd  = (rotl(s1x5, 7) << 3) + rotl(s1x5, 7);   // * 9
  end

  // next state
  logic [31:0] t, n0, n1, n2, n3;
  always_comb begin
    t  = s1 << 9;
    n2 = s2 ^ s0;
    n3 = s3 ^ s1;
    n1 = s1 ^ n2;
    n0 = s0 ^ n3;
    n2 = n2 ^ t;
    n3 = rotl(n3, 11);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s3, s2, s1, s0} <= SEED;
    end else if (step) begin
      s0 <= n0;
      s1 <= n1;
      s2 <= n2;
      s3 <= n3;
    end
  end

  initial assert (SEED != '0) else $error("xoshiro128ss: all-zero seed");
endmodule
