// pbit_network: the graph-colored sparse network of p-bits.
//
// N p-bits, each with its own MAC unit, are wired in a fixed sparse topology
// of at most DEG neighbours per p-bit. The topology is colored so that no two
// connected p-bits share a color; all p-bits of color c update together on the
// strobe phase_en[c]. Because the colors update one after another and each
// p-bit reads the registered states of its neighbours, every p-bit sees the
// latest states of all its neighbours, and one period of the color clocks is
// one full Gibbs sweep of the network (N flips per period).
//
// Weight j_w[i*DEG + k] belongs to the connection of p-bit i in slot k; h[i]
// is the bias of p-bit i. Both are in binary form (see mac_unit). A symmetric
// network needs the same value in the two slots of an edge; that is left to
// the host, which writes the weights. `run` is the global enable: when low all
// p-bits are frozen. Unused neighbour slots contribute nothing.
//
// The coloring, the per-color parallel update and the per-p-bit MAC follow the
// sampler. The topology is this design's: the sampler loads a D-Wave Pegasus
// graph, which is external data; here pbit_pkg::nbr_idx() generates a
// circulant graph (slot 2p links to i + d_p, slot 2p+1 to i - d_p, with d_p
// the p-th integer not divisible by COLORS) and the color is i mod COLORS.
module pbit_network
  import pbit_pkg::*;
#(
  parameter int unsigned N      = N_PBITS,
  parameter int unsigned DEG    = MAX_DEG,
  parameter int unsigned COLORS = NCOLORS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         run,
  input  logic [COLORS-1:0]            phase_en,
  input  logic [BETA_WIDTH-1:0]        beta,
  input  weight_t                      j_w [N*DEG],
  input  weight_t                      h   [N],
  output logic [N-1:0]                 m
);
  localparam int unsigned IW = field_width(W_WIDTH, DEG);

  initial assert (N % COLORS == 0)
    else $error("pbit_network: N must be a multiple of COLORS for the built-in coloring");

  for (genvar i = 0; i < N; i++) begin : g_pbit
    logic [DEG-1:0]      m_nbr;
    weight_t             j_row [DEG];
    logic signed [IW-1:0] field;

    for (genvar k = 0; k < DEG; k++) begin : g_slot
      localparam int NB = nbr_idx(i, k, N, DEG, COLORS);
      if (NB >= 0) begin : g_used
        assign m_nbr[k] = m[NB];
        assign j_row[k] = j_w[i*DEG + k];
      end else begin : g_unused
        assign m_nbr[k] = 1'b0;
        assign j_row[k] = '0;
      end
    end

    mac_unit #(.DEG(DEG), .WW(W_WIDTH), .IW(IW)) u_mac (
      .m_nbr (m_nbr),
      .j_w   (j_row),
      .h     (h[i]),
      .field (field)
    );

    pbit #(.IW(IW), .SEED(pbit_seed(i))) u_pbit (
      .clk    (clk),
      .rst_n  (rst_n),
      .update (run && phase_en[color_of(i, COLORS)]),
      .beta   (beta),
      .field  (field),
      .m      (m[i])
    );
  end
endmodule
