// tb_mirror_reg: random p-bit states with a random snapshot signal (and the
// 1,0,1,0,1 sequence of the readout description): the copy must follow the
// states one cycle later while the snapshot signal is 1 and hold otherwise.
module tb_mirror_reg;
  localparam int N = 70;
  logic clk = 0, rst_n = 0, snapshot = 0;
  logic [N-1:0] m = '0, q, model;
  int checks = 0, failures = 0;

  mirror_reg #(.N(N)) dut (.clk, .rst_n, .snapshot, .m, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      m = {$urandom, $urandom, $urandom};
      snapshot = (n < 5) ? (n % 2 == 0) : ($urandom_range(2) == 0);
      if (snapshot) model = m;
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (q !== model) begin
        failures++;
        if (failures < 5) $display("n=%0d q=%h expected %h", n, q, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
