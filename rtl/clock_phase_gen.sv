// clock_phase_gen: the clocking unit. It derives NCOLORS equally phase-shifted
// color clocks of the same frequency from the system clock.
//
// A modulo-DIV counter runs on the system clock. Color c is given the phase
// offset c*DIV/NCOLORS: `phase_en[c]` is a one-cycle strobe at that count and
// `color_clk[c]` is a 50 % square wave of period DIV that rises in the same
// cycle; the color block updates on the clock edge that ends that cycle. With the
// defaults (300 MHz system clock, DIV = 20, four colors) the color clocks run
// at 15 MHz with phases 0, 90, 180 and 270 degrees. `sweep_done` marks the
// strobe of the last color, after which every p-bit has been updated once.
//
// The sampler obtains these clocks from a vendor clock manager; this design
// produces the same phases as clock enables in the system clock domain so the
// whole p-computer is a single synchronous domain. The frequencies and phases
// follow the sampler; the counter scheme is this design's own.
module clock_phase_gen
  import pbit_pkg::*;
#(
  parameter int unsigned DIV    = CLK_DIV,
  parameter int unsigned COLORS = NCOLORS
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [COLORS-1:0] phase_en,
  output logic [COLORS-1:0] color_clk,
  output logic              sweep_done
);
  localparam int unsigned STEP = DIV / COLORS;
  localparam int unsigned CW   = $clog2(DIV);

  initial assert (DIV % COLORS == 0 && DIV >= 2 * COLORS)
    else $error("clock_phase_gen: DIV must be a multiple of COLORS and >= 2*COLORS");

  logic [CW-1:0] cnt, cnt_next;

  assign cnt_next = (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;

  // the strobes and clocks are registered decodes of the count: in the cycle
  // where cnt == c*STEP, phase_en[c] is high and color_clk[c] has just risen
  function automatic logic [COLORS-1:0] strobes(logic [CW-1:0] v);
    for (int c = 0; c < COLORS; c++) strobes[c] = (v == CW'(c * STEP));
  endfunction

  function automatic logic [COLORS-1:0] clocks(logic [CW-1:0] v);
    for (int c = 0; c < COLORS; c++)
      clocks[c] = ((int'(v) + DIV - c * STEP) % DIV) < DIV / 2;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      phase_en  <= strobes('0);
      color_clk <= clocks('0);
    end else begin
      cnt       <= cnt_next;
      phase_en  <= strobes(cnt_next);
      color_clk <= clocks(cnt_next);
    end
  end

  assign sweep_done = phase_en[COLORS-1];
endmodule
