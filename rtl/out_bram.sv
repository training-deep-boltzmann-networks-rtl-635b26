// out_bram: the output block memory (BRAM 3) that holds one saved snapshot of
// the p-bit states for the host to read.
//
// The memory has NW = ceil(N/32) words of 32 bits; bit b of word w is p-bit
// 32*w + b (unused high bits of the last word read 0). Its write side is
// enabled by the inverted snapshot signal: on the falling edge of `snapshot`
// (1 then 0) it starts saving the mirror register, one word per cycle for NW
// cycles (`busy` high), then pulses `done`. Further cycles with the snapshot
// signal at 0 save nothing, so each snapshot is stored once. The read port is
// synchronous: `rdata` holds word `raddr` one cycle after the request.
//
// Saving on the inverted snapshot signal, only once, follows the sampler's
// readout architecture. The 32-bit word organisation (matching the 32-bit
// host interface) and the word-serial save are this design's choices. The
// snapshot signal must stay low while a save is in progress (asserted).
module out_bram
  import pbit_pkg::*;
#(
  parameter int unsigned N = N_PBITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  snapshot,
  input  logic [N-1:0]          mirror,
  input  logic [$clog2((N+31)/32)-1:0] raddr,
  output logic [31:0]           rdata,
  output logic                  busy,
  output logic                  done
);
  localparam int unsigned NW = (N + 31) / 32;
  localparam int unsigned AW = $clog2(NW);

  logic [31:0]       mem [NW];
  logic              snap_q;
  logic [AW-1:0]     wptr;
  logic [NW*32-1:0]  padded;

  assign padded = (NW*32)'(mirror);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap_q <= 1'b0;
      busy   <= 1'b0;
      done   <= 1'b0;
      wptr   <= '0;
    end else begin
      snap_q <= snapshot;
      done   <= 1'b0;
      if (!busy && snap_q && !snapshot) begin
        busy <= 1'b1;
        wptr <= '0;
      end else if (busy) begin
        if (wptr == AW'(NW - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          wptr <= wptr + 1'b1;
        end
      end
    end
  end

  // block-RAM style arrays: one write port, one registered read port
  always_ff @(posedge clk) begin
    if (busy) mem[wptr] <= padded[32*wptr +: 32];
  end

  always_ff @(posedge clk) begin
    rdata <= (32'(raddr) < NW) ? mem[raddr] : 32'd0;
  end

  a_no_snapshot_while_saving : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !snapshot)
    else $error("out_bram: snapshot asserted while a save is in progress");
endmodule
