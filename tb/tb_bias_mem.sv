// tb_bias_mem: random writes to a 300-entry bias memory compared with a
// testbench copy, including writes beyond the depth (ignored), the reset
// value and cycles without a write.
module tb_bias_mem;
  import pbit_pkg::weight_t;
  localparam int DEPTH = 300;
  logic clk = 0, rst_n = 0, we = 0;
  logic [8:0] waddr = '0;
  weight_t wdata = '0;
  weight_t q [DEPTH];
  weight_t model [DEPTH];
  int checks = 0, failures = 0;

  bias_mem #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .we, .waddr, .wdata, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int a = 0; a < DEPTH; a++) begin
      checks++;
      if (q[a] !== model[a]) begin
        failures++;
        if (failures < 5) $display("entry %0d: %0d expected %0d", a, q[a], model[a]);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) model[a] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we    = ($urandom_range(3) != 0);
      waddr = 9'($urandom_range(511));
      wdata = weight_t'($urandom);
      if (we && waddr < DEPTH) model[waddr] = wdata;
      if (n % 100 == 99) begin @(negedge clk); we = 0; compare(); end
    end
    @(negedge clk); we = 0;
    @(negedge clk); compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
