// tb_ref_pkg: reference models used by the testbenches, written independently
// of the RTL: a xoshiro128** generator using plain multiplications, the p-bit
// activation probability from $exp, and the field scaling by beta.
package tb_ref_pkg;

  typedef struct {
    logic [31:0] s [4];
  } xo_state_t;

  function automatic xo_state_t xo_seed(logic [127:0] seed);
    xo_state_t st;
    for (int w = 0; w < 4; w++) st.s[w] = seed[32*w +: 32];
    return st;
  endfunction

  function automatic logic [31:0] rotl32(logic [31:0] x, int k);
    return (x << k) | (x >> (32 - k));
  endfunction

  // output word of the current state
  function automatic logic [31:0] xo_out(xo_state_t st);
    logic [31:0] a;
    a = st.s[1] * 32'd5;
    return rotl32(a, 7) * 32'd9;
  endfunction

  function automatic xo_state_t xo_step(xo_state_t st);
    logic [31:0] t;
    t = st.s[1] << 9;
    st.s[2] ^= st.s[0];
    st.s[3] ^= st.s[1];
    st.s[1] ^= st.s[2];
    st.s[0] ^= st.s[3];
    st.s[2] ^= t;
    st.s[3] = rotl32(st.s[3], 11);
    return st;
  endfunction

  // 2^32 * (1 + tanh(x)) / 2 for x = xq / 8, saturated to the table range
  function automatic longint act_ref(longint xq);
    real x, p, v;
    if (xq < -64) xq = -64;
    if (xq > 63)  xq = 63;
    x = real'(xq) / 8.0;
    p = 1.0 / (1.0 + $exp(-2.0 * x));
    v = p * 4294967296.0;
    if (v > 4294967295.0) v = 4294967295.0;
    return longint'($floor(v));
  endfunction

  // scaled field: floor(field * beta / 8)
  function automatic longint scale_ref(longint field, int beta);
    longint prod = field * beta;
    return (prod >= 0) ? prod / 8 : -((-prod + 7) / 8);
  endfunction

  // seed of p-bit i, re-derived here (splitmix32 of 4*i + w)
  function automatic logic [31:0] sm32(logic [31:0] x);
    logic [31:0] z;
    z = x + 32'h9E37_79B9;
    z = (z ^ (z >> 16)) * 32'h85EB_CA6B;
    z = (z ^ (z >> 13)) * 32'hC2B2_AE35;
    return z ^ (z >> 16);
  endfunction

  function automatic logic [127:0] seed_ref(int i);
    logic [31:0] s [4];
    for (int w = 0; w < 4; w++) s[w] = sm32(32'(i * 4 + w) ^ 32'h5EED_0000);
    return {s[3], s[2], s[1], s[0]};
  endfunction

endpackage
