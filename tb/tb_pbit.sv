// tb_pbit: predicts every update of one p-bit from a reference generator and
// activation model (beta scaling, table, comparator), with random fields and
// beta values; checks that the state holds without an update strobe and that
// the fraction of ones follows (1 + tanh(beta*I)) / 2 for a fixed field.
module tb_pbit;
  import tb_ref_pkg::*;
  localparam logic [127:0] SEED = 128'h1111_2222_3333_4444_5555_6666_7777_8888;
  logic clk = 0, rst_n = 0, update = 0, m;
  logic [5:0] beta;
  logic signed [13:0] field;
  int checks = 0, failures = 0;
  xo_state_t st;

  pbit #(.IW(14), .SEED(SEED)) dut (.clk, .rst_n, .update, .beta, .field, .m);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_m;
    longint p, r;
    int ones;
    st = xo_seed(SEED);
    beta = 8; field = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (m !== 1'b0) failures++;
    exp_m = 0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      update = ($urandom_range(1) == 1);
      beta   = 6'($urandom_range(63));
      field  = 14'($signed($urandom_range(400)) - 200);
      if (update) begin
        p = act_ref(scale_ref(longint'(field), int'(beta)));
        r = longint'(xo_out(st));
        exp_m = (r < p);
        st = xo_step(st);
      end
      @(negedge clk);
      update = 0;
      checks++;
      if (m !== exp_m) begin
        failures++;
        if (failures < 5) $display("n=%0d field=%0d beta=%0d m=%b expected %b", n, field, beta, m, exp_m);
      end
    end
    // statistics at beta = 1, I = 0.5: (1 + tanh(0.5)) / 2 = 0.7311
    ones = 0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk); update = 1; beta = 8; field = 4;
      @(negedge clk); update = 0; ones += m;
    end
    checks++;
    if (ones < 14300 || ones > 14950) begin
      failures++; $display("fraction of ones %0d / 20000, expected about 14621", ones);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
