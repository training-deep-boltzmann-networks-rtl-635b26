// bias_mem: the bias memory (BRAM 2). It holds the 10-bit s{6}{3} bias of every
// p-bit; entry i is the bias of p-bit i.
//
// The host writes it one entry per cycle through `we`/`waddr`/`wdata`;
// addresses at or beyond DEPTH are ignored. Every entry feeds the MAC units
// at the same time, so the storage is a register array with all entries on
// the `q` output rather than a single-port block RAM. A write takes effect on
// the next clock edge; reset clears all entries to zero.
//
// That the host writes these values into on-chip memory, and their 10-bit
// format, follow the sampler; the register-array organisation and the reset
// value are this design's choices. The host is expected to freeze the p-bits
// (run = 0) while it writes, as the sampler does.
module bias_mem
  import pbit_pkg::*;
#(
  parameter int unsigned DEPTH = N_PBITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  weight_t                  wdata,
  output weight_t                  q [DEPTH]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < DEPTH; a++) q[a] <= '0;
    end else if (we && 32'(waddr) < DEPTH) begin
      q[waddr] <= wdata;
    end
  end
endmodule
