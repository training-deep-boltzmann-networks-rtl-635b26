// pbit_pkg: types, default sizes and elaboration-time helper functions shared
// by the p-computer RTL.
//
// The default sizes are those of the sparse deep Boltzmann machine sampler
// built on a 4,264-node Pegasus graph: 4,264 p-bits, up to 15 neighbours per
// p-bit, four colors, 10-bit s{6}{3} fixed-point weights and biases, a 32-bit
// xoshiro generator per p-bit and 15 MHz color clocks derived from a 300 MHz
// system clock (division by 20).
//
// The functions below run only at elaboration time:
//   * nbr_idx()  - the built-in sparse topology (see the comment at the
//                  function). The published sampler uses a D-Wave Pegasus
//                  graph, which is data supplied from outside the design; this
//                  design instead generates a circulant graph of the same size,
//                  the same maximum degree bound and a valid coloring.
//   * color_of() - the color (update phase) of each p-bit.
//   * pbit_seed()- a distinct non-zero xoshiro seed for every p-bit.
//   * act_value()- one entry of the activation table ACT_TABLE,
//                  (1 + tanh(x)) / 2 scaled to 2^32, evaluated once with
//                  double-precision arithmetic.
package pbit_pkg;

  // ---------------- sizes of the main configuration ----------------
  localparam int unsigned N_PBITS    = 4264; // Pegasus graph size
  localparam int unsigned MAX_DEG    = 15;   // neighbour slots per p-bit
  localparam int unsigned NCOLORS    = 4;    // colors = phase-shifted clocks
  localparam int unsigned W_WIDTH    = 10;   // s{6}{3}: sign, 6 integer, 3 fraction
  localparam int unsigned W_FRAC     = 3;
  localparam int unsigned BETA_WIDTH = 6;    // u{3}{3} inverse temperature
  localparam int unsigned BETA_FRAC  = 3;
  localparam int unsigned LUT_ADDR   = 7;    // activation table: 128 entries
  localparam int unsigned P_WIDTH    = 32;   // probability / random word width
  localparam int unsigned CLK_DIV    = 20;   // 300 MHz / 15 MHz
  localparam int unsigned AXI_ADDR_W = 20;

  // effective-field width: the bias plus MAX_DEG weights never overflow it
  function automatic int unsigned field_width(int unsigned ww, int unsigned deg);
    return ww + $clog2(deg + 1);
  endfunction

  // ------------------------------- types ------------------------------
  typedef logic signed [W_WIDTH-1:0] weight_t;

  // control fields driven by the register file
  typedef struct packed {
    logic                    run;          // global enable (1) / freeze (0)
    logic                    auto_snap;    // snapshot every auto_sweeps sweeps
    logic [BETA_WIDTH-1:0]   beta;         // inverse temperature, u{3}{3}
    logic [31:0]             auto_sweeps;  // sweeps between automatic snapshots
    logic [31:0]             ref_preset;   // flips/ns reference count
  } ctrl_t;

  // -------------------------- topology ----------------------------------
  // k-th positive integer that is not a multiple of ncolors (k from 0).
  function automatic int offset_of(int k, int ncolors);
    int v = 0;
    int found = -1;
    while (found < k) begin
      v++;
      if (v % ncolors != 0) found++;
    end
    return v;
  endfunction

  // Neighbour of p-bit i in slot k, or -1 for an unused slot. Slot 2p
  // connects to i + d_p and slot 2p+1 to i - d_p (mod n), where d_p is the
  // p-th positive integer not divisible by ncolors. With n a multiple of
  // ncolors and color(i) = i mod ncolors, no two neighbours share a color,
  // so every color block can be updated in parallel.
  function automatic int nbr_idx(int i, int k, int n, int maxdeg, int ncolors);
    int d;
    if (k >= 2 * (maxdeg / 2)) return -1;
    d = offset_of(k / 2, ncolors);
    if (2 * d >= n) return -1;          // graph too small for this offset
    if (k % 2 == 0) return (i + d) % n;
    return (i - d + n) % n;
  endfunction

  function automatic int color_of(int i, int ncolors);
    return i % ncolors;
  endfunction

  // ----------------------------- seeds ----------------------------------
  function automatic logic [31:0] splitmix32(logic [31:0] x);
    logic [31:0] z;
    z = x + 32'h9E37_79B9;
    z = (z ^ (z >> 16)) * 32'h85EB_CA6B;
    z = (z ^ (z >> 13)) * 32'hC2B2_AE35;
    return z ^ (z >> 16);
  endfunction

  // 128-bit xoshiro state for p-bit i: {s3, s2, s1, s0}, never all zero.
  function automatic logic [127:0] pbit_seed(int i);
    logic [31:0] s [4];
    for (int w = 0; w < 4; w++) s[w] = splitmix32(32'(i * 4 + w) ^ 32'h5EED_0000);
    if ((s[0] | s[1] | s[2] | s[3]) == 32'd0) s[0] = 32'd1;
    return {s[3], s[2], s[1], s[0]};
  endfunction

  // ------------------------ activation table -----------------------------
  function automatic real exp_series(real y);
    real term = 1.0;
    real acc  = 1.0;
    for (int n = 1; n < 80; n++) begin
      term = term * y / n;
      acc  = acc + term;
    end
    return acc;
  endfunction

  // Entry idx of the table: x = (idx - 2^(addr-1)) / 2^frac and the value is
  // floor(2^32 * (1 + tanh(x)) / 2) = floor(2^32 / (1 + exp(-2x))).
  function automatic logic [P_WIDTH-1:0] act_value(int idx, int addr, int frac);
    real x;
    real p;
    real scaled;
    x = real'(idx - (1 << (addr - 1))) / real'(1 << frac);
    p = 1.0 / (1.0 + exp_series(-2.0 * x));
    scaled = p * 4294967296.0;
    if (scaled > 4294967295.0) scaled = 4294967295.0;
    return P_WIDTH'(longint'($floor(scaled)));
  endfunction

  typedef logic [P_WIDTH-1:0] act_table_t [1 << LUT_ADDR];

  function automatic act_table_t build_act_table();
    act_table_t tab;
    for (int i = 0; i < (1 << LUT_ADDR); i++) tab[i] = act_value(i, LUT_ADDR, W_FRAC);
    return tab;
  endfunction

  // the activation table, evaluated once for the whole design
  localparam act_table_t ACT_TABLE = build_act_table();

endpackage
