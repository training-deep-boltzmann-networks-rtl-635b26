// mirror_reg: the mirror (copy) p-bits of the readout path.
//
// A local register of N bits, one per system p-bit. While the snapshot signal
// is 1 it copies the p-bit states on every clock edge; while it is 0 it holds
// the last copy. The system p-bits keep running unaffected, so the copy can be
// saved to block memory at leisure. One cycle of latency from m to q.
//
// The behaviour (copy while the snapshot signal is 1, hold otherwise) follows
// the sampler's readout architecture; the reset value 0 is this design's.
module mirror_reg
  import pbit_pkg::*;
#(
  parameter int unsigned N = N_PBITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         snapshot,
  input  logic [N-1:0] m,
  output logic [N-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        q <= '0;
    else if (snapshot) q <= m;
  end
endmodule
