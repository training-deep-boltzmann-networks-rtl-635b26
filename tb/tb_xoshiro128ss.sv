// tb_xoshiro128ss: compares the generator with a reference xoshiro128** model
// over 2000 steps, including cycles without a step (state must hold), and
// checks the reset value of the output.
module tb_xoshiro128ss;
  import tb_ref_pkg::*;
  localparam logic [127:0] SEED = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210;
  logic clk = 0, rst_n = 0, step = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  xo_state_t ref_st;

  xoshiro128ss #(.SEED(SEED)) dut (.clk, .rst_n, .step, .rnd);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_st = xo_seed(SEED);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      checks++;
      if (rnd !== xo_out(ref_st)) begin
        failures++;
        if (failures < 5) $display("step %0d: rnd %h expected %h", n, rnd, xo_out(ref_st));
      end
      step = ($urandom_range(3) != 0);
      if (step) ref_st = xo_step(ref_st);
    end
    // known first outputs of this seed, computed with the reference model:
    // also make sure the generator does not sit at a fixed value
    @(negedge clk); step = 0;
    checks++;
    if (rnd === 32'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
