// flip_meter: measurement of the sampling rate (flips per nanosecond).
//
// One counter per color counts the flip attempts of one p-bit of that color
// block, i.e. the color's update strobes while the p-bits run. A reference
// counter, started together with them by `start`, counts system-clock cycles
// up to `preset`; when it gets there all counters stop and `done` is set. The
// host then computes flips/ns = sum_c(count[c] * pbits_in_color_c) /
// (preset * T_sys), with T_sys the system clock period in ns.
//
// Per-color attempt counters stopped by a reference counter with a preset
// follow the sampler's measurement method; counting the update strobes
// (rather than a clock of each p-bit) and the 32-bit widths are this design's
// choices.
module flip_meter
  import pbit_pkg::*;
#(
  parameter int unsigned COLORS = NCOLORS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       preset,
  input  logic              run,
  input  logic [COLORS-1:0] phase_en,
  output logic [31:0]       count [COLORS],
  output logic [31:0]       ref_count,
  output logic              busy,
  output logic              done
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      ref_count <= '0;
      for (int c = 0; c < COLORS; c++) count[c] <= '0;
    end else if (start) begin
      busy      <= (preset != 32'd0);
      done      <= (preset == 32'd0);
      ref_count <= '0;
      for (int c = 0; c < COLORS; c++) count[c] <= '0;
    end else if (busy) begin
      ref_count <= ref_count + 32'd1;
      for (int c = 0; c < COLORS; c++)
        if (run && phase_en[c]) count[c] <= count[c] + 32'd1;
      if (ref_count + 32'd1 == preset) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end
endmodule
