// tb_out_bram: 100 p-bits (4 words). Each snapshot pulse must save the mirror
// once, starting on the falling edge, in exactly 4 busy cycles followed by a
// done pulse; every word is read back through the registered read port. While
// the snapshot signal stays 0 the stored words must not change even when the
// mirror does.
module tb_out_bram;
  localparam int N = 100, NW = 4;
  logic clk = 0, rst_n = 0, snapshot = 0;
  logic [N-1:0] mirror = '0, saved;
  logic [1:0] raddr = '0;
  logic [31:0] rdata;
  logic busy, done;
  int checks = 0, failures = 0;

  out_bram #(.N(N)) dut (.clk, .rst_n, .snapshot, .mirror, .raddr, .rdata, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(logic [N-1:0] exp);
    logic [NW*32-1:0] padded = (NW*32)'(exp);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk); raddr = 2'(w);
      @(negedge clk);
      checks++;
      if (rdata !== padded[32*w +: 32]) begin
        failures++;
        if (failures < 5) $display("word %0d: %h expected %h", w, rdata, padded[32*w +: 32]);
      end
    end
  endtask

  initial begin
    int busy_cycles, dones;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      @(negedge clk);
      mirror = {$urandom, $urandom, $urandom, $urandom};
      saved = mirror;
      snapshot = 1;
      @(negedge clk);
      snapshot = 0;
      busy_cycles = 0; dones = 0;
      for (int t = 0; t < 12; t++) begin
        @(negedge clk);
        busy_cycles += busy; dones += done;
      end
      checks++;
      if (busy_cycles != NW || dones != 1) begin
        failures++; $display("busy %0d cycles, %0d done pulses", busy_cycles, dones);
      end
      check_all(saved);
      // zeros of the snapshot signal save nothing
      mirror = ~mirror;
      repeat (5) @(negedge clk);
      checks++;
      if (busy) failures++;
      check_all(saved);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
