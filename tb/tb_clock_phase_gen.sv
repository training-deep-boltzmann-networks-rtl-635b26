// tb_clock_phase_gen: with the default division (20) and four colors, checks
// that each strobe recurs every 20 cycles, that color c strobes 5*c cycles
// after color 0, that each color clock is high 10 of 20 cycles and rises with
// its strobe, and that sweep_done equals the last color's strobe. Then the
// same for five colors (the Zephyr configuration).
module tb_clock_phase_gen;
  logic clk = 0, rst_n = 0;
  logic [3:0] pe4, cc4; logic sd4;
  logic [4:0] pe5, cc5; logic sd5;
  int checks = 0, failures = 0;

  clock_phase_gen #(.DIV(20), .COLORS(4)) dut4 (.clk, .rst_n, .phase_en(pe4), .color_clk(cc4), .sweep_done(sd4));
  clock_phase_gen #(.DIV(20), .COLORS(5)) dut5 (.clk, .rst_n, .phase_en(pe5), .color_clk(cc5), .sweep_done(sd5));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last4 [4], last5 [5], t0, hi4 [4];
    logic [3:0] cc4_q;
    for (int c = 0; c < 4; c++) begin last4[c] = -1; hi4[c] = 0; end
    for (int c = 0; c < 5; c++) last5[c] = -1;
    t0 = -1; cc4_q = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int c = 0; c < 4; c++) begin
        if (pe4[c]) begin
          if (c == 0) t0 = t;
          if (last4[c] >= 0) begin checks++; if (t - last4[c] != 20) failures++; end
          if (t0 >= 0 && c > 0 && t > 40) begin checks++; if (t - t0 != 5 * c) begin failures++; $display("ph t=%0d c=%0d", t, c); end end
          checks++; if (!cc4[c] || cc4_q[c]) begin failures++; $display("rise t=%0d c=%0d", t, c); end   // rising with the strobe
          last4[c] = t;
        end
        if (t >= 100 && t < 1900) hi4[c] += cc4[c];
      end
      for (int c = 0; c < 5; c++)
        if (pe5[c]) begin
          if (last5[c] >= 0) begin checks++; if (t - last5[c] != 20) failures++; end
          if (c > 0 && last5[c-1] >= 0) begin checks++; if (t - last5[c-1] != 4) begin failures++; $display("p5 t=%0d c=%0d", t, c); end end
          last5[c] = t;
        end
      checks++; if (sd4 !== pe4[3] || sd5 !== pe5[4]) begin failures++; $display("sd t=%0d", t); end
      checks++; if ($countones(pe4) > 1) failures++;
      cc4_q = cc4;
    end
    for (int c = 0; c < 4; c++) begin checks++; if (hi4[c] != 900) begin failures++; $display("duty %0d: %0d", c, hi4[c]); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
