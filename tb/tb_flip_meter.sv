// tb_flip_meter: four color strobes every 20 cycles (the 15 MHz color clocks
// of a 300 MHz system clock). With a preset of 1000 reference cycles each
// color counter must read 50 attempts, so 4 colors x 1066 p-bits x 50 flips in
// 1000 x 3.33 ns give 64 flips/ns for the 4,264-p-bit network. Frozen p-bits
// (run = 0) count nothing; the counters stop when the reference is done.
module tb_flip_meter;
  logic clk = 0, rst_n = 0, start = 0, run = 1;
  logic [31:0] preset = 1000;
  logic [3:0] phase_en = '0;
  logic [31:0] count [4];
  logic [31:0] ref_count;
  logic busy, done;
  int checks = 0, failures = 0, t = 0;

  flip_meter #(.COLORS(4)) dut (.clk, .rst_n, .start, .preset, .run, .phase_en, .count, .ref_count, .busy, .done);

  always #5 clk = ~clk;
  always @(negedge clk) begin
    t++;
    for (int c = 0; c < 4; c++) phase_en[c] = (t % 20 == 5 * c);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int exp);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (50) @(negedge clk);
    checks++; if (ref_count != preset) begin failures++; $display("ref %0d", ref_count); end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (count[c] != 32'(exp)) begin failures++; $display("color %0d: %0d expected %0d", c, count[c], exp); end
    end
    checks++; if (busy) failures++;
  endtask

  initial begin
    real fpns;
    repeat (2) @(posedge clk);
    rst_n = 1;
    measure(50);
    fpns = real'(count[0] + count[1] + count[2] + count[3]) * 1066.0 / (real'(ref_count) * (1000.0 / 300.0));
    $display("measured %0.2f flips/ns for 4264 p-bits at 300 MHz / 20", fpns);
    checks++; if (fpns < 63.9 || fpns > 64.0) failures++;
    preset = 2000; measure(100);
    run = 0; measure(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
